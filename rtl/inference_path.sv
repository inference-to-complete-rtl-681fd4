// inference_path: one inference path of the engine (paper Fig 2): a FIFO
// queue per process element, a dispatcher and the PEs themselves, FPEs for
// the fast path (IS_HPE=0) or HPEs for the slow path (IS_HPE=1). A job goes
// to the next queue in round-robin order that is not full, so different
// flows run on different PEs independently; when every queue is full the
// job is dropped and `drop_cnt` counts it (the data-plane is not affected).
// Results of the PEs are collected round-robin into one valid/ready stream
// for the inference-results parser. Configuration writes go to PE `cfg_pe`
// (all PEs when cfg_pe is all ones). The round-robin policies are this
// design's choice; the per-PE queues follow the paper.
//
// Lint notes: each queue's `overflow` and `count` outputs are left unused
// here, because the dispatcher never pushes a full queue and needs no fill level.
module inference_path #(
  parameter bit IS_HPE    = 1'b0,
  parameter int NPE       = 4,
  parameter int Q_DEPTH   = 512,
  // FPE sizes
  parameter int F_ICACHE  = 1024,
  parameter int F_PCACHE  = 8192,
  // HPE sizes
  parameter int H_N       = 32,
  parameter int H_ICACHE  = 8192,
  parameter int H_PCACHE  = 524288,
  parameter int H_RAM     = 1024
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                enable,
  input  logic                job_valid,
  input  kal_pkg::job_t       job,
  output logic                res_valid,
  input  logic                res_ready,
  output kal_pkg::pe_result_t res,
  input  logic                cfg_we,
  input  logic [3:0]          cfg_pe,
  input  logic [1:0]          cfg_mem,
  input  logic [19:0]         cfg_addr,
  input  logic [31:0]         cfg_data,
  output logic [31:0]         drop_cnt,
  output logic [31:0]         done_cnt,
  output logic [NPE-1:0]      q_nonempty,
  output logic                all_busy_seen   // a job found its first-choice queue full
);
  import kal_pkg::*;
  localparam int PW = NPE > 1 ? $clog2(NPE) : 1;

  logic [NPE-1:0] q_full, q_push, q_valid, q_pop, pe_ready, r_valid, r_ready;
  job_t           q_out [NPE];
  pe_result_t     r     [NPE];
  logic [PW-1:0]  rr_in, rr_out;

  // dispatcher
  logic          found;
  logic [PW-1:0] pick;
  always_comb begin
    found = 1'b0;
    pick  = rr_in;
    for (int k = 0; k < NPE; k++) begin
      if (!found && !q_full[(int'(rr_in) + k) % NPE]) begin
        found = 1'b1;
        pick  = PW'((int'(rr_in) + k) % NPE);
      end
    end
    q_push = '0;
    if (job_valid && found) q_push[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_in <= '0; drop_cnt <= '0; all_busy_seen <= 1'b0;
    end else if (job_valid) begin
      if (found) rr_in <= PW'((int'(pick) + 1) % NPE);
      else       drop_cnt <= drop_cnt + 1'b1;
      if (q_full[rr_in]) all_busy_seen <= 1'b1;
    end
  end

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    logic ovf;
    logic [$clog2(Q_DEPTH):0] cnt;
    logic pe_cfg;
    assign pe_cfg = cfg_we && (cfg_pe == 4'hf || cfg_pe == 4'(p));
    pkt_fifo #(.T(job_t), .DEPTH(Q_DEPTH)) u_q (
      .clk, .rst_n, .push(q_push[p]), .in(job), .full(q_full[p]), .overflow(ovf),
      .out_valid(q_valid[p]), .pop(q_pop[p]), .out(q_out[p]), .count(cnt));
    assign q_nonempty[p] = q_valid[p];
    assign q_pop[p]      = pe_ready[p] && q_valid[p];   // a job is taken only when present
    if (IS_HPE) begin : g_hpe
      hpe #(.N(H_N), .ICACHE_BYTES(H_ICACHE), .PCACHE_BYTES(H_PCACHE), .RAM_DEPTH(H_RAM)) u_pe (
        .clk, .rst_n, .enable, .job_valid(q_valid[p]), .job_ready(pe_ready[p]), .job(q_out[p]),
        .res_valid(r_valid[p]), .res_ready(r_ready[p]), .res(r[p]),
        .cfg_we(pe_cfg), .cfg_mem, .cfg_addr, .cfg_data);
    end else begin : g_fpe
      fpe #(.ICACHE_BYTES(F_ICACHE), .PCACHE_BYTES(F_PCACHE)) u_pe (
        .clk, .rst_n, .enable, .job_valid(q_valid[p]), .job_ready(pe_ready[p]), .job(q_out[p]),
        .res_valid(r_valid[p]), .res_ready(r_ready[p]), .res(r[p]),
        .cfg_we(pe_cfg), .cfg_mem, .cfg_addr(cfg_addr[15:0]), .cfg_data);
    end
  end

  // result collection, round-robin
  logic          rfound;
  logic [PW-1:0] rpick;
  always_comb begin
    rfound = 1'b0;
    rpick  = rr_out;
    for (int k = 0; k < NPE; k++) begin
      if (!rfound && r_valid[(int'(rr_out) + k) % NPE]) begin
        rfound = 1'b1;
        rpick  = PW'((int'(rr_out) + k) % NPE);
      end
    end
    r_ready = '0;
    if (rfound) r_ready[rpick] = res_ready;
  end
  assign res_valid = rfound;
  assign res       = r[rpick];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_out <= '0; done_cnt <= '0;
    end else if (rfound && res_ready) begin
      rr_out   <= PW'((int'(rpick) + 1) % NPE);
      done_cnt <= done_cnt + 1'b1;
    end
  end
endmodule

// fpe: Fast Process Element, the low-latency run-to-completion GEMV
// accelerator of the fast (mouse-flow) inference path.
//
// Datapath (follows the paper): K SIMD lanes of T dot units of N multipliers
// (4 x 8 x 8) form the vector unit, which multiplies a (1, N*K) segment read
// from the regfile by an (N*K, T) weight tile read from the pCache in one
// step. The inline accumulator merges the K lane results and accumulates over
// steps; the activation LUT follows it and writes back into the regfile.
//
// Control (the encoding is this design's own, see kal_pkg::fpe_instr_t): a
// 32-bit VLIW word from the iCache with three slots issued in the same cycle:
//   computation slot   START / MV / MVA / MVAA / FIN
//   parameter slot     LDP: pCache entry -> weight register
//   temporal-data slot LDR: regfile entry -> vector register
// Loads complete one cycle after issue, so a computation uses the operands
// loaded by earlier words. MV clears the accumulator, MVA adds to it, MVAA
// adds, activates and writes back; the step after an MVAA starts from zero. Timing of a computation issued in cycle c:
// products c+1, dot sums c+2, accumulator (and LUT read for MVAA) c+2->c+3,
// regfile write-back at the end of c+3. There are no interlocks: an LDR of an
// MVAA destination must come at least 4 words after that MVAA. START waits for
// a job and loads its 64 bytes into regfile entries 0 and 1. FIN waits for
// the pipeline to drain, emits regfile entry `dst` with the job's hash
// (valid/ready) and restarts at word 0. One word issues per cycle otherwise.
//
// pCache entry layout: weight W[i][j] (input i = 0..N*K-1, output j) in byte
// j*N*K + i. The accumulator's 32-bit width and the truncating requantization
// are this design's choices.
//
// Configuration port (memories are written while `enable` is low):
//   cfg_mem 0: iCache word, 1: pCache 32-bit word, 2: LUT entry (addr[7:0]).
//
// Lint notes: the accumulator's registered output `acc` is unused (the
// activation reads `acc_next` so the LUT stage is one cycle earlier), and
// instruction bits 7:0 are reserved.
module fpe #(
  parameter int K            = 4,
  parameter int T            = 8,
  parameter int N            = 8,
  parameter int ICACHE_BYTES = 1024,
  parameter int PCACHE_BYTES = 8192,
  parameter int RF_ENTRIES   = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 enable,
  // job in
  input  logic                 job_valid,
  output logic                 job_ready,
  input  kal_pkg::job_t        job,
  // result out
  output logic                 res_valid,
  input  logic                 res_ready,
  output kal_pkg::pe_result_t  res,
  // configuration
  input  logic                 cfg_we,
  input  logic [1:0]           cfg_mem,
  input  logic [15:0]          cfg_addr,
  input  logic [31:0]          cfg_data
);
  import kal_pkg::*;

  localparam int VW      = N*K*8;                 // vector width (256)
  localparam int PW      = N*K*T*8;               // pCache entry width (2048)
  localparam int IDEPTH  = ICACHE_BYTES / 4;
  localparam int PDEPTH  = PCACHE_BYTES / (PW/8);
  localparam int IAW     = $clog2(IDEPTH);
  localparam int PAW     = $clog2(PDEPTH);
  localparam int RAW     = $clog2(RF_ENTRIES);
  localparam int DW      = 16 + $clog2(N);
  localparam int ICW     = $clog2(IDEPTH);
  localparam int PCW     = $clog2(PDEPTH*PW/32);

  // ---------------- instruction fetch ----------------
  logic [IAW-1:0] pc, pc_next;
  logic [31:0]    icache_q;
  logic           ins_v;
  fpe_instr_t     ins;
  assign ins = fpe_instr_t'(icache_q);

  cache_ram #(.DEPTH(IDEPTH), .WIDTH(32)) u_icache (
    .clk, .re(1'b1), .raddr(pc_next), .rdata(icache_q),
    .cfg_we(cfg_we && cfg_mem == 2'd0), .cfg_addr(cfg_addr[ICW-1:0]), .cfg_data);

  // ---------------- operand memories ----------------
  logic [PW-1:0]  pcache_q;
  logic [VW-1:0]  rf_q;
  logic           rf_re;
  logic [RAW-1:0] rf_raddr;
  logic           rf_we;
  logic [RAW-1:0] rf_waddr;
  logic [VW/8-1:0] rf_wmask;
  logic [VW-1:0]  rf_wdata;
  logic           rf_load;

  cache_ram #(.DEPTH(PDEPTH), .WIDTH(PW)) u_pcache (
    .clk, .re(ins_v && ins.ldp_v && enable), .raddr(ins.ldp_addr[PAW-1:0]), .rdata(pcache_q),
    .cfg_we(cfg_we && cfg_mem == 2'd1), .cfg_addr(cfg_addr[PCW-1:0]), .cfg_data);

  fpe_regfile #(.ENTRIES(RF_ENTRIES), .WIDTH(VW), .LOAD_ENTRIES(IN_BYTES*8/VW)) u_rf (
    .clk, .re(rf_re), .raddr(rf_raddr), .rdata(rf_q),
    .we(rf_we), .waddr(rf_waddr), .wmask(rf_wmask), .wdata(rf_wdata),
    .load(rf_load), .load_data(job.bytes));

  // ---------------- control ----------------
  typedef enum logic [1:0] {S_RUN, S_DRAIN, S_READ, S_OUT} state_e;
  state_e state;

  logic       is_comp;
  logic [2:0] p_v;                 // computation in flight, stages c+1..c+3
  fpe_op_e    p_op  [3];
  logic [4:0] p_dst [3];
  logic [1:0] p_seg [3];
  logic       p_lut [3];
  logic [HASH_W-1:0] hash_q;

  assign is_comp = ins_v && state == S_RUN &&
                   (ins.op == F_MV || ins.op == F_MVA || ins.op == F_MVAA);
  assign job_ready = enable && ins_v && state == S_RUN && ins.op == F_START;
  assign rf_load   = job_valid && job_ready;

  always_comb begin
    pc_next = pc;
    if (!enable) pc_next = '0;
    else if (ins_v) begin
      unique case (state)
        S_RUN: begin
          if (ins.op == F_START) pc_next = rf_load ? pc + 1'b1 : pc;
          else if (ins.op != F_FIN) pc_next = pc + 1'b1;
        end
        S_OUT:   if (res_ready) pc_next = '0;
        default: ;
      endcase
    end
  end

  always_comb begin
    rf_re    = 1'b0;
    rf_raddr = ins.ldr_addr[RAW-1:0];
    if (state == S_DRAIN && p_v == '0) begin
      rf_re    = 1'b1;
      rf_raddr = ins.dst[RAW-1:0];
    end else if (ins_v && state == S_RUN && ins.ldr_v && enable) begin
      rf_re = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc     <= '0;
      ins_v  <= 1'b0;
      state  <= S_RUN;
      hash_q <= '0;
    end else begin
      pc    <= pc_next;
      ins_v <= enable;
      if (rf_load) hash_q <= job.hash;
      unique case (state)
        S_RUN:   if (ins_v && enable && ins.op == F_FIN) state <= S_DRAIN;
        S_DRAIN: if (p_v == '0) state <= S_READ;
        S_READ:  state <= S_OUT;
        S_OUT:   if (res_ready) state <= S_RUN;
        default: state <= S_RUN;
      endcase
      if (!enable) state <= S_RUN;
    end
  end

  assign res_valid = state == S_OUT;
  assign res.hash  = hash_q;
  assign res.data  = rf_q;

  // computation pipeline control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p_v <= '0;
    else        p_v <= {p_v[1:0], is_comp};
  end
  always_ff @(posedge clk) begin
    p_op[0] <= ins.op;  p_dst[0] <= ins.dst;  p_seg[0] <= ins.seg;  p_lut[0] <= ins.lut;
    for (int s = 1; s < 3; s++) begin
      p_op[s] <= p_op[s-1]; p_dst[s] <= p_dst[s-1]; p_seg[s] <= p_seg[s-1]; p_lut[s] <= p_lut[s-1];
    end
  end

  // ---------------- vector unit ----------------
  logic [K*T*DW-1:0] lanes;
  for (genvar l = 0; l < K; l++) begin : g_lane
    logic [T*N*8-1:0] w;
    logic [T*DW-1:0]  d;
    for (genvar j = 0; j < T; j++) begin : g_col
      assign w[j*N*8 +: N*8] = pcache_q[(j*N*K + l*N)*8 +: N*8];
      assign lanes[(l*T+j)*DW +: DW] = d[j*DW +: DW];
    end
    simd_lane #(.N(N), .T(T), .OW(DW)) u_lane (
      .clk, .v(rf_q[l*N*8 +: N*8]), .w(w), .dots(d));
  end

  // ---------------- accumulator and activation ----------------
  // MV starts a new sum; an MVAA ends one, so the step after it also starts
  // from zero (this lets a single-step layer be one MVAA).
  logic [T*32-1:0] acc_next, acc;
  logic [T*8-1:0]  act;
  logic            chain_end;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      chain_end <= 1'b1;
    else if (p_v[1]) chain_end <= p_op[1] == F_MVAA;
  end
  fpe_accumulator #(.K(K), .T(T), .IW(DW)) u_acc (
    .clk, .rst_n, .en(p_v[1]), .clear(p_op[1] == F_MV || chain_end), .lanes, .acc_next, .acc);

  act_lut #(.LANES(T)) u_act (
    .clk, .en(p_v[1] && p_op[1] == F_MVAA), .use_lut(p_lut[1]), .din(acc_next), .dout(act),
    .cfg_we(cfg_we && cfg_mem == 2'd2), .cfg_addr(cfg_addr[7:0]), .cfg_data(cfg_data[7:0]));

  // write-back of MVAA results: T bytes into segment `seg` of entry `dst`
  always_comb begin
    rf_we    = p_v[2] && p_op[2] == F_MVAA;
    rf_waddr = p_dst[2][RAW-1:0];
    rf_wmask = '0;
    rf_wdata = '0;
    for (int s = 0; s < VW/(T*8); s++)
      if (p_seg[2] == 2'(s)) begin
        rf_wmask[s*T +: T]     = '1;
        rf_wdata[s*T*8 +: T*8] = act;
      end
  end

  a_res_hold: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid && !res_ready |=> res_valid && $stable(res))
    else $error("fpe: result changed while stalled");
endmodule

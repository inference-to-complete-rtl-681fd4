// hpe: Heavy Process Element, the run-to-completion GEMM accelerator of the
// slow (elephant-flow) inference path.
//
// Following the paper: an N x N systolic array (32 x 32) takes weights from
// the pCache and source rows from RAM1 and writes its products to RAM2 or
// RAM3; the accumulator reads RAM2 and RAM3 in parallel, adds, activates,
// pools and writes the results to RAM1. The three banks are dual-port, so
// the array engine (RAM1 port A read, RAM2/RAM3 port A write) and the
// accumulator engine (RAM2/RAM3 port B read, RAM1 port B write) never share
// a port and can run at the same time.
//
// Control (encoding of this design, kal_pkg::hpe_instr_t): 64-bit VLIW words
// from the iCache. The computation slot starts an engine: MM (array),
// ACC/ACCA/ACCP (accumulator), START, FIN. The parameter slot LDP starts the
// weight loader, which copies one N x N tile (N pCache rows) into the array's
// shadow weights in N+1 cycles while the engines run; the next MM swaps the
// shadow set in. A word issues when every engine it needs is idle (and all
// engines are idle if its `barrier` bit is set); dependencies between engines
// are the program's job, through `barrier`. START waits for all engines and
// a job, writes the 64 input bytes into RAM1 rows 0 and 1. FIN waits for all
// engines, emits RAM1 row `a` with the job's hash and restarts at word 0.
// MM results are requantized to Fix-8 when written (RAM rows are 32 x Fix-8).
// ACC with bank=1 writes RAM2 (through port A) to chain more than two
// partial products. An MM of `len` rows takes len + 2N + 1 cycles.
//
// Configuration port (while `enable` is low): cfg_mem 0: iCache 32-bit word,
// 1: pCache 32-bit word, 2: activation LUT entry (addr[7:0]).
module hpe #(
  parameter int N            = 32,
  parameter int ICACHE_BYTES = 8192,
  parameter int PCACHE_BYTES = 524288,
  parameter int RAM_DEPTH    = 1024
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 enable,
  input  logic                 job_valid,
  output logic                 job_ready,
  input  kal_pkg::job_t        job,
  output logic                 res_valid,
  input  logic                 res_ready,
  output kal_pkg::pe_result_t  res,
  input  logic                 cfg_we,
  input  logic [1:0]           cfg_mem,
  input  logic [19:0]          cfg_addr,
  input  logic [31:0]          cfg_data
);
  import kal_pkg::*;

  localparam int RW     = N*8;                    // RAM / pCache row width
  localparam int IDEPTH = ICACHE_BYTES / 8;
  localparam int PDEPTH = PCACHE_BYTES / (RW/8);
  localparam int IAW    = $clog2(IDEPTH);
  localparam int PAW    = $clog2(PDEPTH);
  localparam int AW     = $clog2(RAM_DEPTH);
  localparam int NW     = $clog2(N);
  localparam int PSW    = 24;
  localparam int ICW    = $clog2(IDEPTH*2);
  localparam int PCW    = $clog2(PDEPTH*RW/32);

  // ---------------- instruction fetch ----------------
  logic [IAW-1:0] pc, pc_next;
  logic [63:0]    icache_q;
  logic           ins_v;
  hpe_instr_t     ins;
  assign ins = hpe_instr_t'(icache_q);

  cache_ram #(.DEPTH(IDEPTH), .WIDTH(64)) u_icache (
    .clk, .re(1'b1), .raddr(pc_next), .rdata(icache_q),
    .cfg_we(cfg_we && cfg_mem == 2'd0), .cfg_addr(cfg_addr[ICW-1:0]), .cfg_data);

  // ---------------- memories ----------------
  logic          p_re;
  logic [PAW-1:0] p_addr;
  logic [RW-1:0] p_q;
  cache_ram #(.DEPTH(PDEPTH), .WIDTH(RW)) u_pcache (
    .clk, .re(p_re), .raddr(p_addr), .rdata(p_q),
    .cfg_we(cfg_we && cfg_mem == 2'd1), .cfg_addr(cfg_addr[PCW-1:0]), .cfg_data);

  logic          r_a_en [3], r_a_we [3], r_b_en [3], r_b_we [3];
  logic [AW-1:0] r_a_addr [3], r_b_addr [3];
  logic [RW-1:0] r_a_wd [3], r_b_wd [3], r_a_rd [3], r_b_rd [3];
  for (genvar k = 0; k < 3; k++) begin : g_ram
    dp_ram #(.DEPTH(RAM_DEPTH), .WIDTH(RW)) u_ram (
      .clk,
      .a_en(r_a_en[k]), .a_we(r_a_we[k]), .a_addr(r_a_addr[k]), .a_wdata(r_a_wd[k]), .a_rdata(r_a_rd[k]),
      .b_en(r_b_en[k]), .b_we(r_b_we[k]), .b_addr(r_b_addr[k]), .b_wdata(r_b_wd[k]), .b_rdata(r_b_rd[k]));
  end

  // ---------------- issue control ----------------
  typedef enum logic [1:0] {S_RUN, S_READ, S_OUT} state_e;
  state_e state;
  logic   ld_busy, mm_busy, acc_busy, all_idle;
  logic   is_mm, is_acc, needs_ok, issue;
  logic   mm_start, acc_start, ldp_start, job_take, fin_take;
  logic [HASH_W-1:0] hash_q;

  assign all_idle = !ld_busy && !mm_busy && !acc_busy;
  assign is_mm    = ins.op == H_MM;
  assign is_acc   = ins.op == H_ACC || ins.op == H_ACCA || ins.op == H_ACCP;

  always_comb begin
    needs_ok = 1'b1;
    if (ins.barrier || ins.op == H_START || ins.op == H_FIN) needs_ok = all_idle;
    if (is_mm  && (mm_busy || ld_busy)) needs_ok = 1'b0;
    if (is_acc && acc_busy)             needs_ok = 1'b0;
    if (ins.ldp_v && ld_busy)           needs_ok = 1'b0;
    if (ins.op == H_START && !job_valid) needs_ok = 1'b0;
  end

  assign issue     = enable && ins_v && state == S_RUN && needs_ok;
  assign mm_start  = issue && is_mm;
  assign acc_start = issue && is_acc;
  assign ldp_start = issue && ins.ldp_v;
  assign job_take  = issue && ins.op == H_START;
  assign fin_take  = issue && ins.op == H_FIN;
  assign job_ready = job_take;

  always_comb begin
    pc_next = pc;
    if (!enable) pc_next = '0;
    else if (issue && ins.op != H_FIN) pc_next = pc + 1'b1;
    else if (state == S_OUT && res_ready) pc_next = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= '0; ins_v <= 1'b0; state <= S_RUN; hash_q <= '0;
    end else begin
      pc    <= pc_next;
      ins_v <= enable;
      if (job_take) hash_q <= job.hash;
      unique case (state)
        S_RUN:   if (fin_take) state <= S_READ;
        S_READ:  state <= S_OUT;
        S_OUT:   if (res_ready) state <= S_RUN;
        default: state <= S_RUN;
      endcase
      if (!enable) state <= S_RUN;
    end
  end

  assign res_valid = state == S_OUT;
  assign res.hash  = hash_q;
  assign res.data  = r_b_rd[0];

  // ---------------- weight loader (LDP) ----------------
  logic [PAW-1:0] ld_row;
  logic [NW:0]    ld_cnt;
  logic           ld_v;
  logic [NW-1:0]  ld_wrow;
  logic           w_pending, w_swap;
  assign p_re   = ld_busy && ld_cnt != 0;
  assign p_addr = ld_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_busy <= 1'b0; ld_cnt <= '0; ld_row <= '0; ld_v <= 1'b0; ld_wrow <= '0; w_pending <= 1'b0;
    end else begin
      ld_v <= p_re;
      if (ld_v) ld_wrow <= ld_wrow + 1'b1;
      if (ldp_start) begin
        ld_busy <= 1'b1;
        ld_cnt  <= (NW+1)'(N);
        ld_row  <= PAW'(ins.ldp_tile) << NW;
        ld_wrow <= '0;
      end else if (ld_busy) begin
        if (p_re) begin
          ld_cnt <= ld_cnt - 1'b1;
          ld_row <= ld_row + 1'b1;
        end
        if (ld_cnt == 0 && !ld_v) begin
          ld_busy   <= 1'b0;
          w_pending <= 1'b1;
        end
      end
      if (w_swap) w_pending <= 1'b0;
    end
  end

  // ---------------- MM engine ----------------
  logic [7:0]    mm_issued, mm_left;
  logic [AW-1:0] mm_src, mm_dst;
  logic          mm_bank, mm_rd_v;
  logic          sa_out_v;
  logic [N*PSW-1:0] sa_y;
  logic [RW-1:0] sa_q;

  assign w_swap = mm_start && w_pending;

  systolic_array #(.N(N), .PW(PSW)) u_sa (
    .clk, .rst_n, .w_load(ld_v), .w_row(ld_wrow), .w_data(p_q), .w_swap,
    .in_valid(mm_rd_v), .x(r_a_rd[0]), .out_valid(sa_out_v), .y(sa_y));

  always_comb
    for (int j = 0; j < N; j++) sa_q[8*j +: 8] = requant(32'($signed(sa_y[j*PSW +: PSW])));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mm_busy <= 1'b0; mm_issued <= '0; mm_left <= '0; mm_src <= '0; mm_dst <= '0;
      mm_bank <= 1'b0; mm_rd_v <= 1'b0;
    end else begin
      mm_rd_v <= mm_busy && mm_issued != 0;
      if (mm_start) begin
        mm_busy <= ins.len != 0; mm_issued <= ins.len; mm_left <= ins.len;
        mm_src <= ins.a[AW-1:0]; mm_dst <= ins.d[AW-1:0]; mm_bank <= ins.bank;
      end else begin
        if (mm_busy && mm_issued != 0) begin
          mm_issued <= mm_issued - 1'b1;
          mm_src    <= mm_src + 1'b1;
        end
        if (sa_out_v) begin
          mm_left <= mm_left - 1'b1;
          mm_dst  <= mm_dst + 1'b1;
          if (mm_left == 8'd1) mm_busy <= 1'b0;
        end
      end
    end
  end

  // ---------------- accumulator engine ----------------
  logic          acc_rd_en, acc_wr_en, acc_bank;
  logic [AW-1:0] acc_rd2, acc_rd3, acc_wa;
  logic [RW-1:0] acc_wd;

  hpe_accumulator #(.N(N), .AW(AW)) u_acc (
    .clk, .rst_n, .start(acc_start),
    .a(ins.a[AW-1:0]), .b(ins.b[AW-1:0]), .d(ins.d[AW-1:0]), .len(ins.len),
    .bzero(ins.bzero), .use_lut(ins.op != H_ACC), .pool(ins.op == H_ACCP ? ins.pool : 2'd0),
    .busy(acc_busy),
    .rd_en(acc_rd_en), .rd_addr2(acc_rd2), .rd_addr3(acc_rd3),
    .rd_data2(r_b_rd[1]), .rd_data3(r_b_rd[2]),
    .wr_en(acc_wr_en), .wr_addr(acc_wa), .wr_data(acc_wd),
    .cfg_we(cfg_we && cfg_mem == 2'd2), .cfg_addr(cfg_addr[7:0]), .cfg_data(cfg_data[7:0]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         acc_bank <= 1'b0;
    else if (acc_start) acc_bank <= ins.bank;
  end

  // ---------------- RAM port steering ----------------
  always_comb begin
    for (int k = 0; k < 3; k++) begin
      r_a_en[k] = 1'b0; r_a_we[k] = 1'b0; r_a_addr[k] = '0; r_a_wd[k] = '0;
      r_b_en[k] = 1'b0; r_b_we[k] = 1'b0; r_b_addr[k] = '0; r_b_wd[k] = '0;
    end
    // RAM1 port A: array source rows, or input row 0 at START
    if (job_take) begin
      r_a_en[0] = 1'b1; r_a_we[0] = 1'b1; r_a_addr[0] = '0; r_a_wd[0] = job.bytes[0 +: RW];
    end else begin
      r_a_en[0] = mm_busy && mm_issued != 0; r_a_addr[0] = mm_src;
    end
    // RAM2/RAM3 port A: array results, or accumulator results into RAM2
    if (sa_out_v) begin
      r_a_en[mm_bank ? 2 : 1]   = 1'b1;
      r_a_we[mm_bank ? 2 : 1]   = 1'b1;
      r_a_addr[mm_bank ? 2 : 1] = mm_dst;
      r_a_wd[mm_bank ? 2 : 1]   = sa_q;
    end else if (acc_wr_en && acc_bank) begin
      r_a_en[1] = 1'b1; r_a_we[1] = 1'b1; r_a_addr[1] = acc_wa; r_a_wd[1] = acc_wd;
    end
    // RAM2/RAM3 port B: accumulator operands
    r_b_en[1] = acc_rd_en; r_b_addr[1] = acc_rd2;
    r_b_en[2] = acc_rd_en; r_b_addr[2] = acc_rd3;
    // RAM1 port B: accumulator results, input row 1 at START, FIN read
    if (job_take) begin
      r_b_en[0] = 1'b1; r_b_we[0] = 1'b1; r_b_addr[0] = AW'(1); r_b_wd[0] = job.bytes[RW +: RW];
    end else if (acc_wr_en && !acc_bank) begin
      r_b_en[0] = 1'b1; r_b_we[0] = 1'b1; r_b_addr[0] = acc_wa; r_b_wd[0] = acc_wd;
    end else if (fin_take) begin
      r_b_en[0] = 1'b1; r_b_addr[0] = ins.a[AW-1:0];
    end
  end

  a_no_port_clash: assert property (@(posedge clk) disable iff (!rst_n)
    !(sa_out_v && !mm_bank && acc_wr_en && acc_bank))
    else $error("hpe: array and accumulator both write RAM2 port A");
  a_res_hold: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid && !res_ready |=> res_valid && $stable(res))
    else $error("hpe: result changed while stalled");
endmodule

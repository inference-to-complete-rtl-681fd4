// kaleidoscope_top: the NN inference co-processor that sits beside (not
// inside) a data-plane forwarding pipeline. The data-plane mirrors its
// traffic into the co-processor and, before a packet leaves, looks the
// packet's flow up in the query table; it is otherwise untouched.
//
//   mirror (clk_dp) -> bypass_if -> traffic_monitor (clk_k)
//        first packet of a flow      -> fast path: queues + N_FPE FPEs
//        packet THRESHOLD+1 of a flow -> slow path: queues + N_HPE HPEs
//   each path -> result_parser (argmax) -> rule -> query_table
//   query (clk_dp) -> query_table -> {hit, slow, class}, 5 cycles later
//
// Two clocks: clk_dp is the data-plane clock (mirror input, query port,
// bypass drop counter); clk_k is the co-processor's own, asynchronous clock
// (everything else, including the configuration port). The structure and
// default sizes are those of the paper's K-4FPE configuration (4 FPEs, one
// HPE); rule arbitration (slow path first), the configuration port and the
// counters are this design's choices.
//
// Configuration (clk_k): cfg_path 0 = fast path, 1 = slow path, 2 = the
// result parsers (cfg_addr 0: fast num_classes, 1: slow num_classes);
// cfg_pe selects the PE inside a path (15 = all); cfg_mem and cfg_addr as in
// fpe/hpe. `pe_enable` low holds the PEs at word 0 while they are programmed.
//
// Lint note: rst_k_n is reported as used both asynchronously and
// synchronously. The synchronous use is only the `disable iff` of the PEs'
// handshake assertions; every flip-flop is reset asynchronously.
module kaleidoscope_top #(
  parameter int N_FPE      = 4,
  parameter int N_HPE      = 1,
  parameter int THRESHOLD  = 16,
  parameter int FT_DEPTH   = 65536,
  parameter int QT_DEPTH   = 65536,
  parameter int Q_DEPTH    = 512,
  parameter int F_ICACHE   = 1024,
  parameter int F_PCACHE   = 8192,
  parameter int H_N        = 32,
  parameter int H_ICACHE   = 8192,
  parameter int H_PCACHE   = 524288,
  parameter int H_RAM      = 1024
) (
  // data-plane side
  input  logic          clk_dp,
  input  logic          rst_dp_n,
  input  logic [511:0]  mirror_data,
  input  logic [63:0]   mirror_keep,
  input  logic          mirror_valid,
  input  logic          mirror_last,
  input  logic          query_valid,
  input  logic [15:0]   query_idx,
  output logic          reply_valid,
  output logic          reply_hit,
  output logic          reply_slow,
  output logic [7:0]    reply_cls,
  output logic [31:0]   bypass_drop_cnt,
  // co-processor side
  input  logic          clk_k,
  input  logic          rst_k_n,
  input  logic          pe_enable,
  input  logic          cfg_we,
  input  logic [1:0]    cfg_path,
  input  logic [3:0]    cfg_pe,
  input  logic [1:0]    cfg_mem,
  input  logic [19:0]   cfg_addr,
  input  logic [31:0]   cfg_data,
  output logic          ready,           // tables initialised
  output logic [31:0]   pkt_cnt,
  output logic [31:0]   skip_cnt,
  output logic [31:0]   fwd_cnt,
  output logic [31:0]   fast_job_cnt,
  output logic [31:0]   slow_job_cnt,
  output logic [31:0]   fast_drop_cnt,
  output logic [31:0]   slow_drop_cnt,
  output logic [31:0]   fast_done_cnt,
  output logic [31:0]   slow_done_cnt,
  output logic [31:0]   rule_cnt,
  output logic          fast_queue_full_seen,
  output logic          slow_queue_full_seen,
  output logic          pe_queues_empty  // no job waiting in any PE queue
);
  import kal_pkg::*;

  // ---------------- bypass interface ----------------
  logic [511:0] b_data;
  logic [63:0]  b_keep;
  logic         b_valid, b_last, b_ready;
  bypass_if #(.DEPTH(16), .HEAD_BEATS(4)) u_bypass (
    .clk_dp, .rst_dp_n, .s_data(mirror_data), .s_keep(mirror_keep), .s_valid(mirror_valid),
    .s_last(mirror_last), .drop_cnt(bypass_drop_cnt),
    .clk_k, .rst_k_n, .m_data(b_data), .m_keep(b_keep), .m_valid(b_valid), .m_last(b_last),
    .m_ready(b_ready));

  // ---------------- traffic monitor ----------------
  logic tm_ready, fast_v, slow_v, b_ready_tm;
  job_t fast_job, slow_job;
  traffic_monitor #(.THRESHOLD(THRESHOLD), .FT_DEPTH(FT_DEPTH), .HEAD_BEATS(4)) u_tm (
    .clk(clk_k), .rst_n(rst_k_n), .ready(tm_ready),
    .in_data(b_data), .in_keep(b_keep), .in_valid(b_valid && tm_ready), .in_last(b_last),
    .in_ready(b_ready_tm), .fast_valid(fast_v), .fast_job, .slow_valid(slow_v), .slow_job,
    .pkt_cnt, .skip_cnt, .fwd_cnt);
  assign b_ready = b_ready_tm && tm_ready;

  // ---------------- inference paths ----------------
  logic       fres_v, fres_r, sres_v, sres_r;
  pe_result_t fres, sres;
  logic [N_FPE-1:0] fq_ne;
  logic [N_HPE-1:0] sq_ne;

  inference_path #(.IS_HPE(1'b0), .NPE(N_FPE), .Q_DEPTH(Q_DEPTH),
                   .F_ICACHE(F_ICACHE), .F_PCACHE(F_PCACHE)) u_fast (
    .clk(clk_k), .rst_n(rst_k_n), .enable(pe_enable), .job_valid(fast_v), .job(fast_job),
    .res_valid(fres_v), .res_ready(fres_r), .res(fres),
    .cfg_we(cfg_we && cfg_path == 2'd0), .cfg_pe, .cfg_mem, .cfg_addr, .cfg_data,
    .drop_cnt(fast_drop_cnt), .done_cnt(fast_done_cnt), .q_nonempty(fq_ne),
    .all_busy_seen(fast_queue_full_seen));

  inference_path #(.IS_HPE(1'b1), .NPE(N_HPE), .Q_DEPTH(Q_DEPTH),
                   .H_N(H_N), .H_ICACHE(H_ICACHE), .H_PCACHE(H_PCACHE), .H_RAM(H_RAM)) u_slow (
    .clk(clk_k), .rst_n(rst_k_n), .enable(pe_enable), .job_valid(slow_v), .job(slow_job),
    .res_valid(sres_v), .res_ready(sres_r), .res(sres),
    .cfg_we(cfg_we && cfg_path == 2'd1), .cfg_pe, .cfg_mem, .cfg_addr, .cfg_data,
    .drop_cnt(slow_drop_cnt), .done_cnt(slow_done_cnt), .q_nonempty(sq_ne),
    .all_busy_seen(slow_queue_full_seen));

  // ---------------- result parsers ----------------
  logic [5:0] ncls_fast, ncls_slow;
  always_ff @(posedge clk_k or negedge rst_k_n) begin
    if (!rst_k_n) begin
      ncls_fast <= 6'd32; ncls_slow <= 6'd32;
    end else if (cfg_we && cfg_path == 2'd2) begin
      if (cfg_addr == 20'd0) ncls_fast <= cfg_data[5:0];
      if (cfg_addr == 20'd1) ncls_slow <= cfg_data[5:0];
    end
  end

  logic  frule_v, frule_r, srule_v, srule_r, qt_ready;
  rule_t frule, srule;
  result_parser #(.SLOW(1'b0)) u_fparse (
    .clk(clk_k), .rst_n(rst_k_n), .num_classes(ncls_fast),
    .in_valid(fres_v), .in_ready(fres_r), .in(fres),
    .out_valid(frule_v), .out_ready(frule_r), .out(frule));
  result_parser #(.SLOW(1'b1)) u_sparse (
    .clk(clk_k), .rst_n(rst_k_n), .num_classes(ncls_slow),
    .in_valid(sres_v), .in_ready(sres_r), .in(sres),
    .out_valid(srule_v), .out_ready(srule_r), .out(srule));

  // rule arbitration: slow path first
  logic  qt_we;
  rule_t qt_rule;
  assign srule_r = qt_ready;
  assign frule_r = qt_ready && !srule_v;
  assign qt_we   = qt_ready && (srule_v || frule_v);
  assign qt_rule = srule_v ? srule : frule;

  always_ff @(posedge clk_k or negedge rst_k_n) begin
    if (!rst_k_n) begin
      rule_cnt <= '0; fast_job_cnt <= '0; slow_job_cnt <= '0;
    end else begin
      if (qt_we)  rule_cnt     <= rule_cnt + 1'b1;
      if (fast_v) fast_job_cnt <= fast_job_cnt + 1'b1;
      if (slow_v) slow_job_cnt <= slow_job_cnt + 1'b1;
    end
  end

  // ---------------- query table ----------------
  query_table #(.DEPTH(QT_DEPTH), .LATENCY(5)) u_qt (
    .clk_k, .rst_k_n, .wr_valid(qt_we), .wr_ready(qt_ready), .wr_rule(qt_rule),
    .clk_dp, .rst_dp_n, .q_valid(query_valid), .q_idx(query_idx[$clog2(QT_DEPTH)-1:0]),
    .r_valid(reply_valid), .r_hit(reply_hit), .r_slow(reply_slow), .r_cls(reply_cls));

  assign ready           = tm_ready && qt_ready;
  assign pe_queues_empty = fq_ne == '0 && sq_ne == '0;
endmodule

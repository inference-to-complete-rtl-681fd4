// tb_kaleidoscope_full: one complete operation of kaleidoscope_top with
// every parameter at its default (64K-entry flow and query tables, 512-deep
// queues, 4 FPEs, one HPE with a 512 KB pCache). After the tables clear
// themselves and the PEs are programmed, a mouse flow (one packet) gets a
// fast-path rule, and an elephant flow gets a fast-path rule at its first
// packet and a slow-path rule at its 17th. A non-IPv4 frame is skipped.
// Rules are checked through data-plane queries, each answered exactly five
// data-plane cycles later; an unused index must miss.
module tb_kaleidoscope_full;
  import kal_tb_pkg::*;
  import kal_pkg::*;
  localparam int QT = 65536;

  logic clk_dp = 0, clk_k = 0, rst_dp_n = 0, rst_k_n = 0;
  always #2 clk_dp = ~clk_dp;
  always #5 clk_k  = ~clk_k;
  int checks = 0, failures = 0;

  logic [511:0] mirror_data;
  logic [63:0]  mirror_keep;
  logic mirror_valid, mirror_last, query_valid, reply_valid, reply_hit, reply_slow;
  logic [15:0] query_idx;
  logic [7:0]  reply_cls;
  logic [31:0] bypass_drop_cnt, pkt_cnt, skip_cnt, fwd_cnt, fast_job_cnt, slow_job_cnt;
  logic [31:0] fast_drop_cnt, slow_drop_cnt, fast_done_cnt, slow_done_cnt, rule_cnt;
  logic pe_enable, cfg_we, ready, fast_queue_full_seen, slow_queue_full_seen, pe_queues_empty;
  logic [1:0] cfg_path, cfg_mem;
  logic [3:0] cfg_pe;
  logic [19:0] cfg_addr;
  logic [31:0] cfg_data;

  kaleidoscope_top dut (
    .clk_dp, .rst_dp_n, .mirror_data, .mirror_keep, .mirror_valid, .mirror_last,
    .query_valid, .query_idx, .reply_valid, .reply_hit, .reply_slow, .reply_cls, .bypass_drop_cnt,
    .clk_k, .rst_k_n, .pe_enable, .cfg_we, .cfg_path, .cfg_pe, .cfg_mem, .cfg_addr, .cfg_data,
    .ready, .pkt_cnt, .skip_cnt, .fwd_cnt, .fast_job_cnt, .slow_job_cnt, .fast_drop_cnt,
    .slow_drop_cnt, .fast_done_cnt, .slow_done_cnt, .rule_cnt, .fast_queue_full_seen,
    .slow_queue_full_seen, .pe_queues_empty);

  `include "kal_top_tasks.svh"

  initial begin
    repeat (400000) @(posedge clk_k);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [511:0] x;
    logic hit, slow;
    int cls;
    flow_t m, e;
    mirror_valid = 0; mirror_last = 0; mirror_data = '0; mirror_keep = '0;
    query_valid = 0; query_idx = 0; pe_enable = 0; cfg_we = 0; cfg_path = 0; cfg_pe = 0;
    cfg_mem = 0; cfg_addr = 0; cfg_data = 0;
    repeat (4) @(posedge clk_k); rst_dp_n = 1; rst_k_n = 1;
    wait (ready);
    program_all();
    @(negedge clk_k); pe_enable = 1;
    arp_pkt();
    m = new_flow(17);
    do e = new_flow(6); while (e.idx == m.idx);
    flow_pkt(m, x);
    for (int p = 0; p < 17; p++) begin flow_pkt(e, x); repeat (6) @(negedge clk_dp); end
    wait_idle();
    query(m.idx, hit, slow, cls);
    checks++;
    if (!hit || slow || cls != m.fast_cls) begin
      failures++; $display("mouse flow: hit %0d slow %0d cls %0d exp %0d", hit, slow, cls, m.fast_cls);
    end
    query(e.idx, hit, slow, cls);
    checks++;
    if (!hit || !slow || cls != e.slow_cls) begin
      failures++; $display("elephant flow: hit %0d slow %0d cls %0d exp %0d", hit, slow, cls, e.slow_cls);
    end
    query((m.idx + 1) % QT == e.idx ? (m.idx + 2) % QT : (m.idx + 1) % QT, hit, slow, cls);
    checks += 2;
    if (hit) begin failures++; $display("hit on an unused index"); end
    if (fast_done_cnt != 2 || slow_done_cnt != 1 || skip_cnt != 1 || rule_cnt != 3) begin
      failures++; $display("counters: fast %0d slow %0d skip %0d rules %0d", fast_done_cnt, slow_done_cnt, skip_cnt, rule_cnt);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

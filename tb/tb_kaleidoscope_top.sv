// tb_kaleidoscope_top: end-to-end test of the co-processor at reduced table
// and queue sizes (flow/query tables 1024 entries, 4-deep PE queues, 8 KB
// HPE pCache); the PEs keep their full sizes. Clocks: data plane 250 MHz
// (4 ns), co-processor 100 MHz (10 ns), unrelated.
//
// Phases and the mechanisms each must show (each is counted; one that never
// happens is a failure):
//   1 flood of non-IPv4 frames      -> bypass drops, parser skips
//   2 burst of 48 new flows         -> fast inference on several FPEs,
//                                      fast-queue overflow drops; every flow
//                                      then has its class or (if dropped) a miss
//   3 one flow, 16 packets          -> fast rule only (16 is not above threshold)
//   4 the same flow, 4 more packets -> slow inference on the HPE; the rule is
//                                      overwritten with the slow class
//   queries                         -> hits and misses, each answered exactly
//                                      5 data-plane cycles after the query
module tb_kaleidoscope_top;
  import kal_tb_pkg::*;
  import kal_pkg::*;
  localparam int QT = 1024;

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

  kaleidoscope_top #(.FT_DEPTH(1024), .QT_DEPTH(QT), .Q_DEPTH(4), .H_PCACHE(8192)) dut (
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

  // which FPEs returned a result
  logic [3:0] fpe_used = '0;
  always @(posedge clk_k) fpe_used |= dut.u_fast.r_valid & dut.u_fast.r_ready;

  int m_bypass_drop = 0, m_skip = 0, m_fast = 0, m_fast_overflow = 0, m_multi_fpe = 0;
  int m_slow = 0, m_overwrite = 0, m_hit = 0, m_miss = 0;

  flow_t flows [$];
  bit used_idx [QT];

  function automatic flow_t fresh_flow(input int proto);
    flow_t f;
    do f = new_flow(proto); while (used_idx[f.idx]);
    used_idx[f.idx] = 1;
    return f;
  endfunction

  initial begin
    logic [511:0] x;
    logic hit, slow;
    int cls, narp, nmiss;
    flow_t e;
    mirror_valid = 0; mirror_last = 0; mirror_data = '0; mirror_keep = '0;
    query_valid = 0; query_idx = 0; pe_enable = 0; cfg_we = 0; cfg_path = 0; cfg_pe = 0;
    cfg_mem = 0; cfg_addr = 0; cfg_data = 0;
    for (int i = 0; i < QT; i++) used_idx[i] = 0;
    repeat (4) @(posedge clk_k); rst_dp_n = 1; rst_k_n = 1;
    wait (ready);
    program_all();
    @(negedge clk_k); pe_enable = 1;

    // 1: flood of ARP frames, back to back
    narp = 300;
    for (int i = 0; i < narp; i++) arp_pkt();
    repeat (200) @(posedge clk_k);
    checks += 2;
    if (bypass_drop_cnt != 0) m_bypass_drop++;
    if (skip_cnt != 0) m_skip++;
    if (skip_cnt + bypass_drop_cnt != 32'(narp)) begin
      failures++; $display("skips %0d + drops %0d != %0d frames", skip_cnt, bypass_drop_cnt, narp);
    end
    if (pkt_cnt != 0 || fast_job_cnt != 0) begin failures++; $display("ARP frames made jobs"); end

    // 2: burst of new flows, paced so the bypass keeps them all
    for (int i = 0; i < 48; i++) begin
      flow_t f;
      f = fresh_flow(i % 2 ? 6 : 17);
      flow_pkt(f, x);
      flows.push_back(f);
      repeat (6) @(negedge clk_dp);
    end
    wait_idle();
    checks += 3;
    if (fast_job_cnt != 48) begin failures++; $display("fast jobs %0d", fast_job_cnt); end
    if (fast_done_cnt + fast_drop_cnt != 48) begin failures++; $display("done %0d drop %0d", fast_done_cnt, fast_drop_cnt); end
    if (bypass_drop_cnt + skip_cnt != 32'(narp)) begin failures++; $display("bypass dropped a flow packet"); end
    if (fast_done_cnt != 0) m_fast++;
    if (fast_drop_cnt != 0 && fast_queue_full_seen) m_fast_overflow++;
    if (fpe_used == 4'hf) m_multi_fpe++;
    nmiss = 0;
    foreach (flows[k]) begin
      query(flows[k].idx, hit, slow, cls);
      checks++;
      if (!hit) begin nmiss++; m_miss++; end
      else begin
        m_hit++;
        if (slow || cls != flows[k].fast_cls) begin
          failures++; $display("flow %0d: slow=%0d class %0d exp %0d", k, slow, cls, flows[k].fast_cls);
        end
      end
    end
    checks++;
    if (nmiss != int'(fast_drop_cnt)) begin failures++; $display("misses %0d, fast drops %0d", nmiss, fast_drop_cnt); end

    // 3 and 4: an elephant flow
    e = fresh_flow(6);
    for (int p = 0; p < 16; p++) begin flow_pkt(e, x); repeat (6) @(negedge clk_dp); end
    wait_idle();
    query(e.idx, hit, slow, cls);
    checks++;
    if (!hit || slow || cls != e.fast_cls || slow_job_cnt != 0) begin
      failures++; $display("elephant before threshold: hit %0d slow %0d cls %0d exp %0d", hit, slow, cls, e.fast_cls);
    end
    for (int p = 0; p < 4; p++) begin flow_pkt(e, x); repeat (6) @(negedge clk_dp); end
    wait_idle();
    query(e.idx, hit, slow, cls);
    checks += 2;
    if (slow_job_cnt != 1 || slow_done_cnt != 1) begin failures++; $display("slow jobs %0d done %0d", slow_job_cnt, slow_done_cnt); end
    else m_slow++;
    if (!hit || !slow || cls != e.slow_cls) begin
      failures++; $display("elephant after threshold: hit %0d slow %0d cls %0d exp %0d", hit, slow, cls, e.slow_cls);
    end else m_overwrite++;
    // an index no flow uses
    for (int i = 0; i < QT; i++) if (!used_idx[i]) begin
      query(i, hit, slow, cls);
      checks++;
      if (hit) begin failures++; $display("hit on unused index %0d", i); end else m_miss++;
      break;
    end

    $display("mechanisms: bypass_drop=%0d parser_skip=%0d fast_inference=%0d fast_overflow=%0d multi_fpe=%0d slow_inference=%0d rule_overwrite=%0d query_hit=%0d query_miss=%0d",
             m_bypass_drop, m_skip, m_fast, m_fast_overflow, m_multi_fpe, m_slow, m_overwrite, m_hit, m_miss);
    $display("counters: pkts %0d skips %0d bypass drops %0d fast jobs %0d done %0d dropped %0d slow jobs %0d rules %0d",
             pkt_cnt, skip_cnt, bypass_drop_cnt, fast_job_cnt, fast_done_cnt, fast_drop_cnt, slow_job_cnt, rule_cnt);
    checks += 9;
    if (m_bypass_drop == 0)   begin failures++; $display("mechanism never happened: bypass drop"); end
    if (m_skip == 0)          begin failures++; $display("mechanism never happened: parser skip"); end
    if (m_fast == 0)          begin failures++; $display("mechanism never happened: fast inference"); end
    if (m_fast_overflow == 0) begin failures++; $display("mechanism never happened: fast queue overflow"); end
    if (m_multi_fpe == 0)     begin failures++; $display("mechanism never happened: all FPEs used"); end
    if (m_slow == 0)          begin failures++; $display("mechanism never happened: slow inference"); end
    if (m_overwrite == 0)     begin failures++; $display("mechanism never happened: rule overwrite"); end
    if (m_hit == 0)           begin failures++; $display("mechanism never happened: query hit"); end
    if (m_miss == 0)          begin failures++; $display("mechanism never happened: query miss"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_traffic_monitor: sends a random interleaving of UDP and TCP packets from
// a few flows, plus non-IPv4 frames, through the traffic monitor (parser,
// Toeplitz hash, flow table). A software model (its own Toeplitz hash and a
// per-index packet counter) predicts that the first packet of each flow
// table index leaves on the fast path and the 17th (count larger than the
// threshold of 16) on the slow path, with the right 64 input bytes and hash.
// It also checks the packet and skip counters and that nothing else leaves.
module tb_traffic_monitor;
  import kal_tb_pkg::*;
  import kal_pkg::*;
  localparam int FT = 1024, THR = 16, NFLOW = 6;
  localparam logic [319:0] KEY = 320'h6d5a56da255b0ec24167253d43a38fb0d0ca2bcbae7b30b477cb2da38030f20c6a42b73bbeac01fa;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ready, in_valid, in_last, in_ready, fast_valid, slow_valid;
  logic [511:0] in_data;
  logic [63:0] in_keep;
  job_t fast_job, slow_job;
  logic [31:0] pkt_cnt, skip_cnt, fwd_cnt;
  traffic_monitor #(.THRESHOLD(THR), .FT_DEPTH(FT)) dut (.clk, .rst_n, .ready, .in_data, .in_keep,
    .in_valid, .in_last, .in_ready, .fast_valid, .fast_job, .slow_valid, .slow_job,
    .pkt_cnt, .skip_cnt, .fwd_cnt);

  typedef struct { bit slow; logic [31:0] hash; logic [511:0] bytes; } ev_t;
  ev_t exp_q [$];
  int  cnt [FT];
  int  nfast = 0, nslow = 0, nip = 0, nskip = 0;
  logic [7:0] pkt [];
  logic [31:0] f_sip [NFLOW], f_dip [NFLOW];
  logic [15:0] f_sp [NFLOW], f_dp [NFLOW];
  int          f_proto [NFLOW];

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] toeplitz(input logic [95:0] t);
    logic [31:0] h = 0;
    for (int i = 0; i < 96; i++) if (t[95-i]) h ^= KEY[319-i -: 32];
    return h;
  endfunction

  task automatic send();
    int nb;
    nb = (pkt.size() + 63) / 64;
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_last = (b == nb - 1); in_data = '0; in_keep = '0;
      for (int i = 0; i < 64; i++)
        if (b*64 + i < pkt.size()) begin in_data[8*i +: 8] = pkt[b*64 + i]; in_keep[i] = 1; end
    end
    @(negedge clk); in_valid = 0; in_last = 0;
  endtask

  // one packet of flow f (IHL 5); f < 0 sends an ARP frame instead
  task automatic flow_pkt(input int f);
    int l4, pay, n, idx;
    logic [31:0] h;
    ev_t e;
    if (f < 0) begin
      pkt = new[60];
      foreach (pkt[i]) pkt[i] = 8'($urandom);
      pkt[12] = 8'h08; pkt[13] = 8'h06;
      nskip++;
      send();
      return;
    end
    l4 = 34;
    pay = (f_proto[f] == 6) ? l4 + 20 : l4 + 8;
    n = pay + $urandom_range(100, 0);
    pkt = new[n];
    foreach (pkt[i]) pkt[i] = 8'($urandom);
    pkt[12] = 8'h08; pkt[13] = 8'h00; pkt[14] = 8'h45; pkt[23] = 8'(f_proto[f]);
    {pkt[26], pkt[27], pkt[28], pkt[29]} = f_sip[f];
    {pkt[30], pkt[31], pkt[32], pkt[33]} = f_dip[f];
    {pkt[l4], pkt[l4+1]} = f_sp[f];
    {pkt[l4+2], pkt[l4+3]} = f_dp[f];
    if (f_proto[f] == 6) pkt[l4+12] = 8'h50;
    h = toeplitz({f_sip[f], f_dip[f], f_sp[f], f_dp[f]});
    idx = int'(h) & (FT - 1);
    e.hash = h; e.bytes = '0;
    e.bytes[7:0] = pkt[l4]; e.bytes[15:8] = pkt[l4+1]; e.bytes[23:16] = pkt[l4+2]; e.bytes[31:24] = pkt[l4+3];
    e.bytes[39:32] = 8'(f_proto[f]);
    for (int i = 0; i < 59; i++) e.bytes[8*(5+i) +: 8] = (pay + i < n) ? pkt[pay + i] : 8'd0;
    cnt[idx]++; nip++;
    if (cnt[idx] == 1)       begin e.slow = 0; exp_q.push_back(e); end
    if (cnt[idx] == THR + 1) begin e.slow = 1; exp_q.push_back(e); end
    send();
  endtask

  always @(posedge clk) if (rst_n) begin
    if (fast_valid || slow_valid) begin
      checks++;
      if (fast_valid && slow_valid) begin failures++; $display("both paths at once"); end
      else if (exp_q.size() == 0) begin failures++; $display("unexpected job"); end
      else begin
        job_t j;
        j = fast_valid ? fast_job : slow_job;
        checks += 3;
        if (slow_valid != exp_q[0].slow) begin failures++; $display("wrong path (slow=%0d)", slow_valid); end
        if (j.hash !== exp_q[0].hash) begin failures++; $display("hash %h exp %h", j.hash, exp_q[0].hash); end
        if (j.bytes !== exp_q[0].bytes) begin failures++; $display("job bytes"); end
        if (fast_valid) nfast++; else nslow++;
        void'(exp_q.pop_front());
      end
    end
  end

  initial begin
    int nslow_exp;
    in_valid = 0; in_last = 0; in_data = '0; in_keep = '0;
    for (int i = 0; i < FT; i++) cnt[i] = 0;
    for (int f = 0; f < NFLOW; f++) begin
      f_sip[f] = $urandom; f_dip[f] = $urandom; f_sp[f] = 16'($urandom); f_dp[f] = 16'($urandom);
      f_proto[f] = (f % 2) ? 6 : 17;
    end
    f_sip[0] = 32'h420995bb; f_dip[0] = 32'ha18e6450; f_sp[0] = 16'd2794; f_dp[0] = 16'd1766;
    repeat (3) @(posedge clk); rst_n = 1;
    wait (ready);
    for (int k = 0; k < 140; k++) begin
      int r;
      r = $urandom_range(NFLOW + 1, 0);
      flow_pkt(r >= NFLOW ? -1 : r);
      if ($urandom_range(3, 0) == 0) repeat ($urandom_range(4, 1)) @(negedge clk);
    end
    repeat (20) @(posedge clk);
    nslow_exp = 0;
    for (int i = 0; i < FT; i++) if (cnt[i] > THR) nslow_exp++;
    checks += 5;
    if (exp_q.size() != 0) begin failures++; $display("%0d jobs missing", exp_q.size()); end
    if (pkt_cnt != 32'(nip)) begin failures++; $display("pkt_cnt %0d exp %0d", pkt_cnt, nip); end
    if (skip_cnt != 32'(nskip)) begin failures++; $display("skip_cnt %0d exp %0d", skip_cnt, nskip); end
    if (nslow == 0 || nslow != nslow_exp) begin failures++; $display("slow jobs %0d exp %0d", nslow, nslow_exp); end
    if (nfast == 0) begin failures++; $display("no fast jobs"); end
    $display("fast %0d slow %0d ip %0d skipped %0d", nfast, nslow, nip, nskip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

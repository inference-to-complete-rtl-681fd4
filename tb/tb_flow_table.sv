// tb_flow_table: DEPTH=256. Waits for the self-clear, then sends random
// lookups (many back to back on the same index, to use the forwarding path)
// and checks first-appearance flags, counts (saturating at 255) and the
// two-cycle result latency against a software table.
module tb_flow_table;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, fwd_seen = 0;
  logic ready, in_valid, out_valid, out_first, out_fwd;
  logic [7:0] in_idx, out_count;
  int model [256];
  int exp_first [$], exp_cnt [$];
  flow_table #(.DEPTH(256), .CNT_W(8)) dut (.clk, .rst_n, .ready, .in_valid, .in_idx,
    .out_valid, .out_first, .out_count, .out_fwd);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // a lookup presented in cycle c (sampled at edge k) shows its result in
  // cycle c+2, i.e. right after edge k+1
  int lat_q [$];
  int cycle = 0;
  always @(posedge clk) begin
    cycle++;
    #1;
    if (out_valid) begin
      checks += 3;
      if (out_first !== (exp_first[0] != 0)) begin failures++; $display("first mismatch"); end
      if (int'(out_count) != exp_cnt[0]) begin failures++; $display("count %0d exp %0d", out_count, exp_cnt[0]); end
      if (cycle - lat_q[0] != 1) begin failures++; $display("latency %0d", cycle - lat_q[0]); end
      void'(exp_first.pop_front()); void'(exp_cnt.pop_front()); void'(lat_q.pop_front());
      if (out_fwd) fwd_seen++;
    end
  end

  initial begin
    int idx;
    in_valid = 0; in_idx = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(posedge clk);
    checks++;
    if (ready) begin failures++; $display("ready during clear"); end
    wait (ready);
    for (int i = 0; i < 256; i++) model[i] = 0;
    idx = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_valid = $urandom_range(3, 0) != 0;
      if ($urandom_range(2, 0) != 0) idx = $urandom_range(15, 0);   // hot flows
      else if ($urandom_range(3, 0) == 0) idx = $urandom_range(255, 0);
      if (t > 2500) idx = 7;                                          // saturate one counter
      in_idx = 8'(idx);
      if (in_valid) begin
        exp_first.push_back(model[idx] == 0);
        model[idx] = model[idx] == 0 ? 1 : (model[idx] < 255 ? model[idx] + 1 : 255);
        exp_cnt.push_back(model[idx]);
        lat_q.push_back(cycle + 1);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (fwd_seen == 0) begin failures++; $display("forwarding never used"); end
    checks++;
    if (model[7] != 255) begin failures++; $display("saturation not reached in test"); end
    $display("forwarded lookups: %0d", fwd_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

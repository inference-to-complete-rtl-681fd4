// tb_pkt_fifo: DEPTH=8 queue of 16-bit words with random push/pop; checks
// order against a software queue, `full`, the overflow pulse on a push into
// a full queue and the count.
module tb_pkt_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, ovf_seen = 0;
  logic push, pop, full, overflow, out_valid;
  logic [15:0] in, out;
  logic [3:0] count;
  logic [15:0] q [$];
  pkt_fifo #(.T(logic [15:0]), .DEPTH(8)) dut (.clk, .rst_n, .push, .in, .full, .overflow,
    .out_valid, .pop, .out, .count);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    push = 0; pop = 0; in = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      checks += 3;
      if (int'(count) != q.size()) begin failures++; $display("count %0d exp %0d", count, q.size()); end
      if (full != (q.size() == 8)) begin failures++; $display("full"); end
      if (out_valid != (q.size() != 0)) begin failures++; $display("out_valid"); end
      if (q.size() != 0) begin
        checks++;
        if (out !== q[0]) begin failures++; $display("order: got %h exp %h", out, q[0]); end
      end
      // phases: fill past full, then drain, then random
      push = (t % 400 < 100) ? 1 : (t % 400 < 200) ? 0 : $urandom_range(1, 0);
      pop  = (t % 400 < 100) ? 0 : (t % 400 < 200) ? 1 : $urandom_range(1, 0);
      if (q.size() == 0) pop = 0;
      in = 16'($urandom);
      #1;
      checks++;
      if (overflow != (push && q.size() == 8)) begin failures++; $display("overflow flag"); end
      if (overflow) ovf_seen++;
      begin
        bit acc;
        acc = push && q.size() < 8;     // a full queue refuses even with a pop
        if (pop) void'(q.pop_front());
        if (acc) q.push_back(in);
      end
    end
    checks++;
    if (ovf_seen == 0) begin failures++; $display("no overflow exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

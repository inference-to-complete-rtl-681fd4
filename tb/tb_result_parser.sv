// tb_result_parser: random PE results (with ties and a varying number of
// classes) through the argmax; checks class, index and path flag, and that
// back-pressure holds the output without losing results.
module tb_result_parser;
  import kal_tb_pkg::*;
  import kal_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [5:0] num_classes;
  pe_result_t in;
  rule_t out;
  int exp_cls [$], exp_idx [$];
  result_parser #(.SLOW(1'b1)) dut (.clk, .rst_n, .num_classes, .in_valid, .in_ready, .in,
    .out_valid, .out_ready, .out);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int sent = 0, got = 0;
  int pend_cls, pend_idx;
  logic acc;
  always @(posedge clk) begin
    acc <= rst_n && in_valid && in_ready;
    if (rst_n && in_valid && in_ready) begin
      exp_cls.push_back(pend_cls); exp_idx.push_back(pend_idx); sent++;
    end
  end
  initial begin
    in_valid = 0; in = '0; out_ready = 0; num_classes = 6'd9; acc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    while (sent < 400) begin
      @(negedge clk);
      if (!in_valid || acc) begin
        in_valid = $urandom_range(3, 0) != 0;
        if ($urandom_range(50, 0) == 0) num_classes = 6'($urandom_range(32, 1));
        if (in_valid) begin
          int m;
          in.hash = $urandom;
          for (int i = 0; i < 32; i++) in.data[8*i +: 8] = 8'(rnd8(sent % 3 == 0 ? 3 : 120));
          pend_cls = 0; m = s8(in.data[7:0]);
          for (int i = 1; i < int'(num_classes); i++)
            if (s8(in.data[8*i +: 8]) > m) begin m = s8(in.data[8*i +: 8]); pend_cls = i; end
          pend_idx = int'(in.hash[15:0]);
        end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (got != sent) begin failures++; $display("got %0d of %0d", got, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    out_ready <= $urandom_range(2, 0) != 0;
  end
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks += 3;
    if (int'(out.cls) != exp_cls[0]) begin failures++; $display("class %0d exp %0d", out.cls, exp_cls[0]); end
    if (int'(out.idx) != exp_idx[0]) begin failures++; $display("idx"); end
    if (!out.slow) begin failures++; $display("slow flag"); end
    void'(exp_cls.pop_front()); void'(exp_idx.pop_front());
    got++;
  end
endmodule

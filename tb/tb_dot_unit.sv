// tb_dot_unit: random vectors through dot_unit (N=8); checks every result
// against a software dot product and the 2-cycle latency.
module tb_dot_unit;
  import kal_tb_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [63:0] a, b;
  logic signed [18:0] dot;
  int exp_q [$];
  dot_unit #(.N(8)) dut (.clk, .a, .b, .dot);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int e;
    a = '0; b = '0;
    for (int t = 0; t < 300; t++) begin
      e = 0;
      for (int i = 0; i < 8; i++) begin
        int x, y;
        x = (t < 3) ? -128 : rnd8(128); y = (t < 3) ? -128 : rnd8(128);
        if (x > 127) x = 127; if (y > 127) y = 127;
        a[8*i +: 8] = 8'(x); b[8*i +: 8] = 8'(y);
        e += x * y;
      end
      exp_q.push_back(e);
      @(posedge clk); #1;
      if (t >= 1) begin
        // result of the vector applied two edges ago
        checks++;
        if (int'(dot) != exp_q[0]) begin
          failures++; $display("dot mismatch t=%0d got %0d exp %0d", t, dot, exp_q[0]);
        end
        void'(exp_q.pop_front());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

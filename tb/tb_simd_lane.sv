// tb_simd_lane: one SIMD lane (N=8 inputs, T=8 columns) with random data;
// each column's sum is checked against a software GEMV (1,8)x(8,8).
module tb_simd_lane;
  import kal_tb_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [63:0]  v;
  logic [511:0] w;
  logic [8*19-1:0] dots;
  simd_lane #(.N(8), .T(8)) dut (.clk, .v, .w, .dots);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int e [8];
    for (int t = 0; t < 50; t++) begin
      for (int j = 0; j < 8; j++) e[j] = 0;
      for (int i = 0; i < 8; i++) v[8*i +: 8] = 8'(rnd8(100));
      for (int j = 0; j < 8; j++)
        for (int i = 0; i < 8; i++) begin
          w[(j*8+i)*8 +: 8] = 8'(rnd8(100));
          e[j] += s8(v[8*i +: 8]) * s8(w[(j*8+i)*8 +: 8]);
        end
      repeat (2) @(posedge clk);
      #1;
      for (int j = 0; j < 8; j++) begin
        checks++;
        if (int'($signed(dots[j*19 +: 19])) != e[j]) begin
          failures++; $display("col %0d got %0d exp %0d", j, $signed(dots[j*19 +: 19]), e[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mac: random a, w, c; checks d = a*w + c and the forwarded a one cycle later.
module tb_mac;
  import kal_tb_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic signed [7:0] a, w, a_out;
  logic signed [23:0] c, d;
  mac #(.PW(24)) dut (.clk, .a, .w, .c, .a_out, .d);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int ea, ew, ec;
      @(negedge clk);
      ea = rnd8(127); ew = rnd8(127); ec = int'($urandom_range(2000000, 0)) - 1000000;
      a = 8'(ea); w = 8'(ew); c = 24'(ec);
      @(negedge clk);
      checks += 2;
      if (int'(d) != ea * ew + ec) begin failures++; $display("d got %0d exp %0d", d, ea*ew+ec); end
      if (int'(a_out) != ea) begin failures++; $display("a_out"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_act_lut: loads a ReLU table, then checks requantization with saturation
// (identity mode) and table look-up (LUT mode) on random wide sums.
module tb_act_lut;
  import kal_tb_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, use_lut, cfg_we;
  logic [8*32-1:0] din;
  logic [63:0] dout;
  logic [7:0] cfg_addr, cfg_data;
  act_lut #(.LANES(8)) dut (.clk, .en, .use_lut, .din, .dout, .cfg_we, .cfg_addr, .cfg_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int e [8];
    en = 0; use_lut = 0; cfg_we = 0; din = '0; cfg_addr = 0; cfg_data = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 8'(i);
      cfg_data = (i < 128) ? 8'(i) : 8'd0;     // ReLU on Fix-8
    end
    @(negedge clk); cfg_we = 0;
    for (int t = 0; t < 100; t++) begin
      @(negedge clk);
      en = 1; use_lut = t[0];
      for (int i = 0; i < 8; i++) begin
        int v;
        v = int'($urandom_range(12000, 0)) - 6000;
        din[32*i +: 32] = 32'(v);
        e[i] = use_lut ? relu(rq(v)) : rq(v);
      end
      @(negedge clk); en = 0;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (s8(dout[8*i +: 8]) != e[i]) begin
          failures++; $display("lane %0d got %0d exp %0d", i, s8(dout[8*i +: 8]), e[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

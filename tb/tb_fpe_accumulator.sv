// tb_fpe_accumulator: random lane results; checks MV-style clear, MVA-style
// accumulation over several steps and hold when `en` is low.
module tb_fpe_accumulator;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, clear;
  logic [4*8*19-1:0] lanes;
  logic [8*32-1:0] acc_next, acc;
  fpe_accumulator #(.K(4), .T(8), .IW(19)) dut (.clk, .rst_n, .en, .clear, .lanes, .acc_next, .acc);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint model [8];
    en = 0; clear = 0; lanes = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      en = ($urandom_range(3, 0) != 0);
      clear = (t % 5 == 0);
      for (int l = 0; l < 4; l++)
        for (int j = 0; j < 8; j++)
          lanes[(l*8+j)*19 +: 19] = 19'($urandom_range(200000, 0) - 100000);
      if (en)
        for (int j = 0; j < 8; j++) begin
          longint s;
          s = clear ? 0 : model[j];
          for (int l = 0; l < 4; l++) s += longint'($signed(lanes[(l*8+j)*19 +: 19]));
          model[j] = s;
        end
      else if (t == 0) for (int j = 0; j < 8; j++) model[j] = 0;
      @(posedge clk); #1;
      for (int j = 0; j < 8; j++) begin
        checks++;
        if (longint'($signed(acc[j*32 +: 32])) != model[j]) begin
          failures++; $display("t=%0d col %0d got %0d exp %0d", t, j, $signed(acc[j*32 +: 32]), model[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

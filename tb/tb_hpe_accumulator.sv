// tb_hpe_accumulator: the engine works against two software-modelled RAMs
// (RAM2, RAM3: registered read, one cycle) and a captured write port. Runs
// ACC (identity), ACC with bzero, ACCA (ReLU table) and ACCP with 2- and
// 4-row max-pooling; checks every written row, its address and the
// len + 2 cycle busy time.
module tb_hpe_accumulator;
  import kal_tb_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, bzero, use_lut, busy, rd_en, wr_en, cfg_we;
  logic [9:0] a, b, d, rd_addr2, rd_addr3, wr_addr;
  logic [7:0] len, cfg_addr, cfg_data;
  logic [1:0] pool;
  logic [N*8-1:0] rd_data2, rd_data3, wr_data;
  logic [N*8-1:0] ram2 [64], ram3 [64];
  logic [N*8-1:0] wrote [1024];
  bit   written [1024];
  int   nwrites;

  hpe_accumulator #(.N(N), .AW(10)) dut (.clk, .rst_n, .start, .a, .b, .d, .len, .bzero, .use_lut, .pool,
    .busy, .rd_en, .rd_addr2, .rd_addr3, .rd_data2, .rd_data3, .wr_en, .wr_addr, .wr_data,
    .cfg_we, .cfg_addr, .cfg_data);

  always_ff @(posedge clk) if (rd_en) begin
    rd_data2 <= ram2[rd_addr2[5:0]];
    rd_data3 <= ram3[rd_addr3[5:0]];
  end
  always_ff @(posedge clk) if (wr_en) begin
    wrote[wr_addr] <= wr_data; written[wr_addr] <= 1'b1; nwrites <= nwrites + 1;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run(input int ia, input int ib, input int id, input int il, input int bz,
                     input int lut, input int pl);
    int t0, cyc, w, rows;
    for (int k = 0; k < 1024; k++) written[k] = 0;
    nwrites = 0;
    @(negedge clk);
    start = 1; a = 10'(ia); b = 10'(ib); d = 10'(id); len = 8'(il); bzero = bz[0];
    use_lut = lut[0]; pool = 2'(pl);
    @(negedge clk); start = 0;
    cyc = 0;                       // cycles with busy high
    while (busy) begin cyc++; @(negedge clk); end
    checks++;
    if (cyc != il + 2) begin failures++; $display("busy for %0d cycles, exp %0d", cyc, il + 2); end
    w = 1 << pl;
    rows = il / w;
    checks++;
    if (nwrites != rows) begin failures++; $display("%0d writes, exp %0d", nwrites, rows); end
    for (int r = 0; r < rows; r++) begin
      for (int i = 0; i < N; i++) begin
        int m, v;
        m = -1000;
        for (int k = 0; k < w; k++) begin
          v = sat8(s8(ram2[ia + r*w + k][8*i +: 8]) + (bz ? 0 : s8(ram3[ib + r*w + k][8*i +: 8])));
          if (lut) v = relu(v);
          if (v > m) m = v;
        end
        checks++;
        if (!written[id + r] || s8(wrote[id + r][8*i +: 8]) != m) begin
          failures++; $display("row %0d elem %0d got %0d exp %0d", r, i, s8(wrote[id + r][8*i +: 8]), m);
        end
      end
    end
  endtask

  initial begin
    start = 0; a = 0; b = 0; d = 0; len = 0; bzero = 0; use_lut = 0; pool = 0; cfg_we = 0;
    cfg_addr = 0; cfg_data = 0;
    for (int r = 0; r < 64; r++)
      for (int i = 0; i < N; i++) begin
        ram2[r][8*i +: 8] = 8'(rnd8(120)); ram3[r][8*i +: 8] = 8'(rnd8(120));
      end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 8'(i); cfg_data = (i < 128) ? 8'(i) : 8'd0;
    end
    @(negedge clk); cfg_we = 0;
    run(0, 5, 100, 8, 0, 0, 0);     // ACC
    run(3, 0, 200, 4, 1, 0, 0);     // ACC, RAM3 operand zero
    run(10, 20, 300, 6, 0, 1, 0);   // ACCA
    run(0, 30, 400, 8, 0, 1, 1);    // ACCP, window 2
    run(16, 8, 500, 16, 0, 1, 2);   // ACCP, window 4
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

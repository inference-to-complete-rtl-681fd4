// tb_systolic_array: loads a random N x N weight tile (N=8) through the
// shadow set, swaps it in, streams l=12 random rows back to back and checks
// each output row against a software matrix product, the 2N-1 cycle
// latency and that the rows leave back to back in order. A second tile is
// then loaded while the first is in use, to check the double buffering.
module tb_systolic_array;
  import kal_tb_pkg::*;
  localparam int N = 8, L = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic w_load, w_swap, in_valid, out_valid;
  logic [2:0] w_row;
  logic [N*8-1:0] w_data, x;
  logic [N*24-1:0] y;
  int W [N][N];
  int X [L][N];
  systolic_array #(.N(N), .PW(24)) dut (.clk, .rst_n, .w_load, .w_row, .w_data, .w_swap,
                                         .in_valid, .x, .out_valid, .y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load_tile();
    for (int i = 0; i < N; i++) begin
      @(negedge clk); w_load = 1; w_row = 3'(i);
      for (int j = 0; j < N; j++) begin W[i][j] = rnd8(127); w_data[8*j +: 8] = 8'(W[i][j]); end
    end
    @(negedge clk); w_load = 0;
  endtask

  task automatic run_rows(input int pass);
    int t0, got;
    @(negedge clk); w_swap = 1;
    @(negedge clk); w_swap = 0;
    for (int r = 0; r < L; r++) for (int i = 0; i < N; i++) X[r][i] = rnd8(127);
    fork
      begin
        for (int r = 0; r < L; r++) begin
          in_valid = 1;
          for (int i = 0; i < N; i++) x[8*i +: 8] = 8'(X[r][i]);
          if (r == 0) t0 = $time;
          @(negedge clk);
        end
        in_valid = 0; x = '0;
        if (pass == 0) load_tile();        // next tile loads while rows drain
      end
      begin
        got = 0;
        while (got < L) begin
          @(posedge clk); #1;
          if (out_valid) begin
            if (got == 0) begin
              checks++;
              // in_valid set at negedge t0; first output valid 2N-1 edges later
              if (($time - t0 + 4) / 10 != 2*N-1) begin
                failures++; $display("latency %0d", ($time - t0 + 4) / 10);
              end
            end
            for (int j = 0; j < N; j++) begin
              int e;
              e = 0;
              for (int i = 0; i < N; i++) e += X[got][i] * W_used(i, j, pass);
              checks++;
              if (int'($signed(y[j*24 +: 24])) != e) begin
                failures++; $display("pass %0d row %0d col %0d got %0d exp %0d", pass, got, j, $signed(y[j*24 +: 24]), e);
              end
            end
            got++;
          end else if (got > 0) begin
            failures++; $display("gap in output rows");
            got = L;
          end
        end
      end
    join
  endtask

  int Wa [N][N];
  function automatic int W_used(input int i, input int j, input int pass);
    return Wa[i][j];
  endfunction

  initial begin
    w_load = 0; w_swap = 0; in_valid = 0; x = '0; w_row = 0; w_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    load_tile();
    Wa = W;
    run_rows(0);          // loads the next tile into the shadow set meanwhile
    repeat (3) @(negedge clk);
    Wa = W;
    run_rows(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

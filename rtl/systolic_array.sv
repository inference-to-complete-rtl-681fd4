// systolic_array: N x N weight-stationary systolic array of mac cells, the
// GEMM kernel of the HPE. Each cycle with `in_valid` one row x (N Fix-8
// values) of the (l, N) source matrix enters; 2N-1 cycles later, in order, the
// row y = x * W (N sums, 10 fraction bits) leaves with `out_valid`.
// Following the paper's Fig 4, data move down the columns and partial sums
// move right along the rows: cell (r, c) holds W[c][r], column c carries x[c]
// and row r produces y[r]. Input rows are skewed (column c delayed c cycles)
// and output rows de-skewed (row r delayed N-1-r cycles) inside, so the
// latency from `in_valid` to `out_valid` is 2N-1 cycles and l rows take
// l + 2N - 1 cycles. The skew buffers and the weight-stationary dataflow are
// this design's choices.
// Weights: with `w_load`, row `w_row` of W (N Fix-8, W[w_row][j] at byte j)
// is written into the shadow set; `w_swap` makes the shadow set active.
module systolic_array #(
  parameter int N  = 32,
  parameter int PW = 24,
  localparam int RW = $clog2(N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              w_load,
  input  logic [RW-1:0]     w_row,
  input  logic [N*8-1:0]    w_data,
  input  logic              w_swap,
  input  logic              in_valid,
  input  logic [N*8-1:0]    x,
  output logic              out_valid,
  output logic [N*PW-1:0]   y
);
  logic [7:0] w_shadow [N][N];   // [i][j] = W[i][j]
  logic [7:0] w_active [N][N];

  always_ff @(posedge clk) begin
    if (w_load)
      for (int j = 0; j < N; j++) w_shadow[w_row][j] <= w_data[8*j +: 8];
    if (w_swap) w_active <= w_shadow;
  end

  // input skew: column c delayed by c cycles
  logic signed [7:0] a_top [N];
  for (genvar c = 0; c < N; c++) begin : g_skew
    if (c == 0) begin : g_nodelay
      assign a_top[c] = x[7:0];
    end else begin : g_delay
      logic [7:0] sh [c];
      always_ff @(posedge clk) begin
        sh[0] <= in_valid ? x[8*c +: 8] : 8'd0;
        for (int k = 1; k < c; k++) sh[k] <= sh[k-1];
      end
      assign a_top[c] = sh[c-1];
    end
  end

  // cell array
  logic signed [7:0]    a_w [N+1][N];   // a_w[r][c]: data entering row r, column c
  logic signed [PW-1:0] p_w [N][N+1];   // p_w[r][c]: partial sum entering column c of row r
  for (genvar c = 0; c < N; c++) begin : g_top
    assign a_w[0][c] = in_valid || c != 0 ? a_top[c] : 8'sd0;
  end
  for (genvar r = 0; r < N; r++) begin : g_row
    assign p_w[r][0] = '0;
    for (genvar c = 0; c < N; c++) begin : g_col
      mac #(.PW(PW)) u_mac (
        .clk, .a(a_w[r][c]), .w(w_active[c][r]), .c(p_w[r][c]),
        .a_out(a_w[r+1][c]), .d(p_w[r][c+1]));
    end
  end

  // output de-skew: row r delayed by N-1-r cycles
  for (genvar r = 0; r < N; r++) begin : g_deskew
    if (r == N-1) begin : g_nodelay
      assign y[r*PW +: PW] = p_w[r][N];
    end else begin : g_delay
      logic [PW-1:0] sh [N-1-r];
      always_ff @(posedge clk) begin
        sh[0] <= p_w[r][N];
        for (int k = 1; k < N-1-r; k++) sh[k] <= sh[k-1];
      end
      assign y[r*PW +: PW] = sh[N-2-r];
    end
  end

  // valid delay line, 2N-1 cycles
  logic [2*N-2:0] v_sh;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_sh <= '0;
    else        v_sh <= {v_sh[2*N-3:0], in_valid};
  end
  assign out_valid = v_sh[2*N-2];
endmodule

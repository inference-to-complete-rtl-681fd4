// simd_lane: T dot units that share one length-N input segment and each
// take their own weight column, computing the (1,N) x (N,T) product of a
// blocked GEMV step (SIMD, as in the FPE of the paper). Latency 2 cycles
// (that of dot_unit).
//   v     : N Fix-8 inputs
//   w     : T columns of N Fix-8 weights, column j at [j*N*8 +: N*8]
//   dots  : T sums, column j at [j*OW +: OW]
module simd_lane #(
  parameter int N  = 8,
  parameter int T  = 8,
  parameter int OW = 16 + $clog2(N)
) (
  input  logic            clk,
  input  logic [N*8-1:0]  v,
  input  logic [T*N*8-1:0] w,
  output logic [T*OW-1:0] dots
);
  for (genvar j = 0; j < T; j++) begin : g_dot
    logic signed [OW-1:0] d;
    dot_unit #(.N(N), .OW(OW)) u_dot (.clk, .a(v), .b(w[j*N*8 +: N*8]), .dot(d));
    assign dots[j*OW +: OW] = d;
  end
endmodule

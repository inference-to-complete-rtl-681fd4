// dot_unit: dot product of two length-N Fix-8 vectors, as in the FPE of the
// paper: N parallel multipliers followed by an adder tree of N-1 adders, so
// the depth grows as log2(N). Two register stages: the products are
// registered, then the tree output. Latency 2 cycles, one dot product per
// cycle. The pipeline split is this design's choice.
//   a, b    : N signed Fix-8 values each (element i at [8i+:8])
//   dot     : signed sum of a[i]*b[i], 10 fraction bits
module dot_unit #(
  parameter int N   = 8,
  parameter int OW  = 16 + $clog2(N)
) (
  input  logic                 clk,
  input  logic [N*8-1:0]       a,
  input  logic [N*8-1:0]       b,
  output logic signed [OW-1:0] dot
);
  logic signed [15:0] prod [N];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++)
      prod[i] <= $signed(a[8*i +: 8]) * $signed(b[8*i +: 8]);
  end

  // Balanced adder tree over the registered products (N-1 adders).
  logic signed [OW-1:0] tree [2*N-1];
  always_comb begin
    for (int i = 0; i < N; i++) tree[N-1+i] = OW'(prod[i]);
    for (int i = N-2; i >= 0; i--) tree[i] = tree[2*i+1] + tree[2*i+2];
  end

  always_ff @(posedge clk) dot <= tree[0];
endmodule

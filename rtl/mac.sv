// mac: multiply-adder cell of the HPE systolic array, d = a*b + c in one
// cycle (as in the paper). Weight-stationary: `w` is the cell's held weight,
// `a` the Fix-8 data passing through (forwarded one register later), `c` the
// partial sum coming in and `d` the registered sum going out.
module mac #(
  parameter int PW = 24
) (
  input  logic                 clk,
  input  logic signed [7:0]    a,
  input  logic signed [7:0]    w,
  input  logic signed [PW-1:0] c,
  output logic signed [7:0]    a_out,
  output logic signed [PW-1:0] d
);
  always_ff @(posedge clk) begin
    a_out <= a;
    d     <= c + PW'(a * w);
  end
endmodule

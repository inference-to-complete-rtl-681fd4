// fpe_accumulator: inline accumulator of the FPE. Each cycle in which `en`
// is high it adds the K lane results of every one of the T columns and
// either loads that sum (clear=1, the MV instruction) or adds it to the
// running value (clear=0, MVA/MVAA), giving the blocked-GEMV sum of the
// paper's Fig 1. One register stage: `acc` shows the new value one cycle
// after `en`. `acc_next` is the same value before the register, used by the
// activation stage. Accumulator width (32 bit) is this design's choice.
module fpe_accumulator #(
  parameter int K  = 4,
  parameter int T  = 8,
  parameter int IW = 19
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 clear,
  input  logic [K*T*IW-1:0]    lanes,   // lane l, column j at [(l*T+j)*IW +: IW]
  output logic [T*32-1:0]      acc_next,
  output logic [T*32-1:0]      acc
);
  always_comb begin
    for (int j = 0; j < T; j++) begin
      logic signed [31:0] s;
      s = clear ? 32'sd0 : $signed(acc[j*32 +: 32]);
      for (int l = 0; l < K; l++) s += 32'($signed(lanes[(l*T+j)*IW +: IW]));
      acc_next[j*32 +: 32] = s;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= acc_next;
  end
endmodule

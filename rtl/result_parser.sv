// result_parser: inference-results parser behind a group of process
// elements. It takes a PE result (32 Fix-8 outputs and the flow hash),
// finds the class with the largest output among the first `num_classes`
// (argmax, signed, lowest index on ties) and emits a rule {table index =
// low 16 hash bits, path flag, class} for the query table. The argmax
// follows the paper; the rule format is this design's choice.
// One register stage with valid/ready; full throughput.
module result_parser #(
  parameter bit SLOW = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [5:0]          num_classes,   // 1..32
  input  logic                in_valid,
  output logic                in_ready,
  input  kal_pkg::pe_result_t in,
  output logic                out_valid,
  input  logic                out_ready,
  output kal_pkg::rule_t      out
);
  import kal_pkg::*;
  logic [CLASS_W-1:0] best;

  always_comb begin
    fix8_t m;
    best = '0;
    m    = $signed(in.data[7:0]);
    for (int i = 1; i < 32; i++)
      if (i < int'(num_classes) && $signed(in.data[8*i +: 8]) > m) begin
        m    = $signed(in.data[8*i +: 8]);
        best = CLASS_W'(i);
      end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out <= '{idx: in.hash[IDX_W-1:0], slow: SLOW, cls: best};
    end
  end
endmodule

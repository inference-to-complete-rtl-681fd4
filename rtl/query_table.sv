// query_table: the only point where the co-processor and the data-plane
// meet. Rules from the inference-results parsers are written in the
// co-processor clock (valid/ready); the data-plane looks a flow up in its
// own clock and gets {hit, slow, class} LATENCY cycles later (5 in the
// paper). A later rule for the same index overwrites the earlier one, so an
// elephant flow's slow-path result replaces its first, fast-path one. After
// reset the table clears itself in the co-processor clock, one entry per
// cycle, with `wr_ready` low. The memory is a simple dual-clock RAM; the
// registered read plus LATENCY-1 pipeline registers make the latency.
module query_table #(
  parameter int DEPTH   = 65536,
  parameter int LATENCY = 5,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic                       clk_k,
  input  logic                       rst_k_n,
  input  logic                       wr_valid,
  output logic                       wr_ready,
  input  kal_pkg::rule_t             wr_rule,
  input  logic                       clk_dp,
  input  logic                       rst_dp_n,
  input  logic                       q_valid,
  input  logic [AW-1:0]              q_idx,
  output logic                       r_valid,
  output logic                       r_hit,
  output logic                       r_slow,
  output logic [kal_pkg::CLASS_W-1:0] r_cls
);
  import kal_pkg::*;
  typedef struct packed {
    logic               hit;
    logic               slow;
    logic [CLASS_W-1:0] cls;
  } qent_t;

  qent_t       mem [DEPTH];
  logic        clearing;
  logic [AW:0] clr_idx;

  assign wr_ready = !clearing;

  always_ff @(posedge clk_k) begin
    if (clearing)      mem[clr_idx[AW-1:0]] <= '0;
    else if (wr_valid) mem[wr_rule.idx[AW-1:0]] <= '{hit: 1'b1, slow: wr_rule.slow, cls: wr_rule.cls};
  end

  always_ff @(posedge clk_k or negedge rst_k_n) begin
    if (!rst_k_n) begin
      clearing <= 1'b1; clr_idx <= '0;
    end else if (clearing) begin
      clr_idx <= clr_idx + 1'b1;
      if (clr_idx == (AW+1)'(DEPTH-1)) clearing <= 1'b0;
    end
  end

  // data-plane read pipeline
  qent_t pipe_d [LATENCY];
  logic  pipe_v [LATENCY];
  always_ff @(posedge clk_dp) if (q_valid) pipe_d[0] <= mem[q_idx];
  always_ff @(posedge clk_dp) for (int s = 1; s < LATENCY; s++) pipe_d[s] <= pipe_d[s-1];
  always_ff @(posedge clk_dp or negedge rst_dp_n) begin
    if (!rst_dp_n) for (int s = 0; s < LATENCY; s++) pipe_v[s] <= 1'b0;
    else begin
      pipe_v[0] <= q_valid;
      for (int s = 1; s < LATENCY; s++) pipe_v[s] <= pipe_v[s-1];
    end
  end
  assign r_valid = pipe_v[LATENCY-1];
  assign r_hit   = pipe_d[LATENCY-1].hit;
  assign r_slow  = pipe_d[LATENCY-1].slow;
  assign r_cls   = pipe_d[LATENCY-1].cls;
endmodule

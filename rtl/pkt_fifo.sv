// pkt_fifo: synchronous FIFO queue placed in front of each process element
// (512 deep in the paper). First-word-fall-through: `out` shows the oldest
// entry while `out_valid` is high. A push into a full queue is refused and
// pulses `overflow` (the packet is lost in the inference path only).
// Simultaneous push and pop are allowed when not full.
module pkt_fifo #(
  parameter type T     = kal_pkg::job_t,
  parameter int  DEPTH = 512,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    push,
  input  T        in,
  output logic    full,
  output logic    overflow,
  output logic    out_valid,
  input  logic    pop,
  output T        out,
  output logic [AW:0] count
);
  T mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic do_push, do_pop;

  assign full      = count == (AW+1)'(DEPTH);
  assign out_valid = count != 0;
  assign do_push   = push && !full;
  assign do_pop    = pop && out_valid;
  assign overflow  = push && full;
  assign out       = mem[rp];

  always_ff @(posedge clk) if (do_push) mem[wp] <= in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) pop |-> out_valid)
    else $error("pkt_fifo: pop while empty");
endmodule

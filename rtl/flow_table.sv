// flow_table: per-flow state of the traffic monitor, indexed by the flow
// hash: a first-appearance (seen) flag and a saturating packet counter.
// Every lookup is a read-modify-write: the entry is read (cycle 1), updated
// (cycle 2: seen=1, count+1, or count=1 for a new flow) and written back.
// A packet of the same flow in the very next cycle gets the just-written
// value through a forwarding path, so one lookup per cycle is sustained.
// Results (`out_first`: the flow had not been seen; `out_count`: count
// including this packet) appear two cycles after `in_valid`. After reset the
// table clears itself, one entry per cycle; `ready` is low meanwhile and
// lookups are ignored. Hash collisions merge flows (as the paper notes).
module flow_table #(
  parameter int DEPTH = 65536,
  parameter int CNT_W = 8,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             ready,
  input  logic             in_valid,
  input  logic [AW-1:0]    in_idx,
  output logic             out_valid,
  output logic             out_first,
  output logic [CNT_W-1:0] out_count,
  output logic             out_fwd      // this lookup used the forwarded entry
);
  typedef struct packed {
    logic             seen;
    logic [CNT_W-1:0] count;
  } entry_t;

  entry_t        mem [DEPTH];
  entry_t        q, old, upd;
  logic          s1_v;
  logic [AW-1:0] s1_idx;
  logic          w_v;
  logic [AW-1:0] w_idx;
  entry_t        w_data;
  logic          clearing, fwd_used;
  logic [AW:0]   clr_idx;

  assign ready = !clearing;

  always_ff @(posedge clk) if (in_valid && ready) q <= mem[in_idx];

  always_comb begin
    fwd_used = w_v && w_idx == s1_idx;
    old      = fwd_used ? w_data : q;
    upd.seen = 1'b1;
    if (!old.seen)           upd.count = CNT_W'(1);
    else if (&old.count)     upd.count = old.count;
    else                     upd.count = old.count + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (clearing)  mem[clr_idx[AW-1:0]] <= '0;
    else if (s1_v) mem[s1_idx]          <= upd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_idx <= '0; w_v <= 1'b0; w_idx <= '0; w_data <= '0;
      out_valid <= 1'b0; out_first <= 1'b0; out_count <= '0; out_fwd <= 1'b0;
      clearing <= 1'b1; clr_idx <= '0;
    end else begin
      if (clearing) begin
        clr_idx <= clr_idx + 1'b1;
        if (clr_idx == (AW+1)'(DEPTH-1)) clearing <= 1'b0;
      end
      s1_v   <= in_valid && ready;
      s1_idx <= in_idx;
      w_v    <= s1_v;
      w_idx  <= s1_idx;
      w_data <= upd;
      out_valid <= s1_v;
      out_first <= !old.seen;
      out_count <= upd.count;
      out_fwd   <= s1_v && fwd_used;
    end
  end
endmodule

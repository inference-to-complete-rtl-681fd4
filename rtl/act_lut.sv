// act_lut: quantized look-up-table activation. Each of LANES wide sums is
// requantized to Fix-8 (arithmetic shift by 5, saturate); with `use_lut` the
// Fix-8 value, read as an unsigned index, selects one entry of a
// programmable 256-deep table (ReLU, sigmoid, ... as the user loads it),
// otherwise the saturated value passes as is. The 256-deep table for Fix-8
// follows the paper; the identity option and the single table shared by all
// lanes (read through LANES parallel ports) are this design's choices.
// Timing: output registered, valid one cycle after `en`.
// Table writes: cfg_we with cfg_addr (8 bit) and cfg_data (8 bit).
module act_lut #(
  parameter int LANES = 8
) (
  input  logic                 clk,
  input  logic                 en,
  input  logic                 use_lut,
  input  logic [LANES*32-1:0]  din,
  output logic [LANES*8-1:0]   dout,
  input  logic                 cfg_we,
  input  logic [7:0]           cfg_addr,
  input  logic [7:0]           cfg_data
);
  import kal_pkg::*;
  logic [7:0] table_q [256];

  always_ff @(posedge clk) if (cfg_we) table_q[cfg_addr] <= cfg_data;

  always_ff @(posedge clk) begin
    if (en) begin
      for (int i = 0; i < LANES; i++) begin
        fix8_t q;
        q = requant($signed(din[i*32 +: 32]));
        dout[i*8 +: 8] <= use_lut ? table_q[q] : q;
      end
    end
  end
endmodule

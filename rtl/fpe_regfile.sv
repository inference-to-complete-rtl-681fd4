// fpe_regfile: temporal-data register file of the FPE, ENTRIES x WIDTH bits
// (32 x 256 in the paper). One registered read port whose output holds its
// value while `re` is low (the LDR slot), one byte-masked write port for the
// activation write-back (MVAA), and a job-load port that writes the input
// raw bytes into entries 0..LOAD_ENTRIES-1 in one cycle (START). A job load
// takes priority over a write-back in the same cycle (programs never overlap
// the two). The port structure is this design's choice.
module fpe_regfile #(
  parameter int ENTRIES      = 32,
  parameter int WIDTH        = 256,
  parameter int LOAD_ENTRIES = 2,
  localparam int AW = $clog2(ENTRIES)
) (
  input  logic                          clk,
  input  logic                          re,
  input  logic [AW-1:0]                 raddr,
  output logic [WIDTH-1:0]              rdata,
  input  logic                          we,
  input  logic [AW-1:0]                 waddr,
  input  logic [WIDTH/8-1:0]            wmask,
  input  logic [WIDTH-1:0]              wdata,
  input  logic                          load,
  input  logic [LOAD_ENTRIES*WIDTH-1:0] load_data
);
  logic [WIDTH-1:0] mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (load) begin
      for (int e = 0; e < LOAD_ENTRIES; e++) mem[e] <= load_data[e*WIDTH +: WIDTH];
    end else if (we) begin
      for (int b = 0; b < WIDTH/8; b++)
        if (wmask[b]) mem[waddr][8*b +: 8] <= wdata[8*b +: 8];
    end
    if (re) rdata <= mem[raddr];
  end
endmodule

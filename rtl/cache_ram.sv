// cache_ram: run-time programmable cache used as the iCache and the pCache
// of the FPE and HPE. Read-only for the datapath during inference: one
// registered read port whose output holds while `re` is low. Programmed
// through a 32-bit configuration port: word `cfg_addr` of the memory seen as
// 32-bit words (word w lands in entry w/(WIDTH/32), bits [32*(w%(WIDTH/32))+:32]).
// WIDTH must be a multiple of 32. Sizes are set per instance.
module cache_ram #(
  parameter int DEPTH = 256,
  parameter int WIDTH = 32,
  localparam int AW  = $clog2(DEPTH),
  localparam int WPE = WIDTH / 32,
  localparam int CW  = $clog2(DEPTH * WPE)
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             cfg_we,
  input  logic [CW-1:0]    cfg_addr,
  input  logic [31:0]      cfg_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  if (WPE == 1) begin : g_one
    always_ff @(posedge clk) if (cfg_we) mem[cfg_addr[AW-1:0]] <= cfg_data;
  end else begin : g_many
    localparam int SW = $clog2(WPE);
    always_ff @(posedge clk)
      if (cfg_we) mem[cfg_addr[CW-1:SW]][32*cfg_addr[SW-1:0] +: 32] <= cfg_data;
  end

  always_ff @(posedge clk) if (re) rdata <= mem[raddr];
endmodule

// dp_ram: one bank of the HPE's multi-bank dual-port memory (RAM1, RAM2,
// RAM3), DEPTH x WIDTH bits (1024 x 256 in the paper). Two independent
// ports, each able to read or write in any cycle. A read (en & !we) returns
// the data at the next clock edge; the output holds while the port is idle.
// Writing the same address from both ports in one cycle is not allowed
// (port B wins here). Read-during-write on one port returns the old data.
module dp_ram #(
  parameter int DEPTH = 1024,
  parameter int WIDTH = 256,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             a_en,
  input  logic             a_we,
  input  logic [AW-1:0]    a_addr,
  input  logic [WIDTH-1:0] a_wdata,
  output logic [WIDTH-1:0] a_rdata,
  input  logic             b_en,
  input  logic             b_we,
  input  logic [AW-1:0]    b_addr,
  input  logic [WIDTH-1:0] b_wdata,
  output logic [WIDTH-1:0] b_rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      else      a_rdata     <= mem[a_addr];
    end
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      else      b_rdata     <= mem[b_addr];
    end
  end
endmodule

// toeplitz_hash: flow hash of the traffic monitor. The paper reuses the
// receive-side hash of the Corundum NIC, a Toeplitz hash; this is an own
// implementation of the same function: for every set bit i (most
// significant first) of the 96-bit input {src_ip, dst_ip, src_port,
// dst_port}, the 32 key bits starting at key bit i are XORed into the
// result. KEY is the 40-byte key, most significant byte first (default: the
// widely used RSS verification key). Output registered, one cycle after
// `in_valid`.
module toeplitz_hash #(
  parameter logic [319:0] KEY = 320'h6d5a56da255b0ec24167253d43a38fb0d0ca2bcbae7b30b477cb2da38030f20c6a42b73bbeac01fa
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] src_ip,
  input  logic [31:0] dst_ip,
  input  logic [15:0] src_port,
  input  logic [15:0] dst_port,
  output logic        out_valid,
  output logic [31:0] hash
);
  logic [95:0] tuple;
  logic [31:0] h;
  assign tuple = {src_ip, dst_ip, src_port, dst_port};

  always_comb begin
    h = '0;
    for (int i = 0; i < 96; i++)
      if (tuple[95-i]) h ^= KEY[319-i -: 32];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      hash      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) hash <= h;
    end
  end
endmodule

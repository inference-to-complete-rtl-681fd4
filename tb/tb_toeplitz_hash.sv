// tb_toeplitz_hash: the published RSS verification vectors for IPv4 with
// TCP ports (source/destination address and port -> expected 32-bit hash),
// plus a zero input and the one-cycle latency.
module tb_toeplitz_hash;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid;
  logic [31:0] src_ip, dst_ip, hash;
  logic [15:0] src_port, dst_port;
  toeplitz_hash dut (.clk, .rst_n, .in_valid, .src_ip, .dst_ip, .src_port, .dst_port, .out_valid, .hash);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic vec(input logic [31:0] s, input logic [31:0] d, input logic [15:0] sp,
                     input logic [15:0] dp, input logic [31:0] exp_h);
    @(negedge clk);
    in_valid = 1; src_ip = s; dst_ip = d; src_port = sp; dst_port = dp;
    @(negedge clk);
    in_valid = 0;
    checks += 2;
    if (!out_valid) begin failures++; $display("no out_valid"); end
    if (hash !== exp_h) begin failures++; $display("hash %h exp %h", hash, exp_h); end
  endtask

  initial begin
    in_valid = 0; src_ip = 0; dst_ip = 0; src_port = 0; dst_port = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    vec({8'd66, 8'd9, 8'd149, 8'd187},    {8'd161, 8'd142, 8'd100, 8'd80}, 16'd2794,  16'd1766,  32'h51ccc178);
    vec({8'd199, 8'd92, 8'd111, 8'd2},    {8'd65, 8'd69, 8'd140, 8'd83},   16'd14230, 16'd4739,  32'hc626b0ea);
    vec({8'd24, 8'd19, 8'd198, 8'd95},    {8'd12, 8'd22, 8'd207, 8'd184},  16'd12898, 16'd38024, 32'h5c2b394a);
    vec({8'd38, 8'd27, 8'd205, 8'd30},    {8'd209, 8'd142, 8'd163, 8'd6},  16'd48228, 16'd2217,  32'hafc7327f);
    vec({8'd153, 8'd39, 8'd163, 8'd191},  {8'd202, 8'd188, 8'd127, 8'd2},  16'd44251, 16'd1303,  32'h10e828a2);
    vec(32'd0, 32'd0, 16'd0, 16'd0, 32'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

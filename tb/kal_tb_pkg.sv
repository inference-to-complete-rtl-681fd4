// kal_tb_pkg: helpers shared by the testbenches: instruction-word builders
// for the FPE and HPE and reference arithmetic (Fix-8 requantization,
// saturating add, ReLU table) written independently of the RTL.
package kal_tb_pkg;

  function automatic logic [31:0] fw(input int op, input int dst = 0, input int seg = 0,
                                     input int lut = 0, input int ldp = -1, input int ldr = -1);
    logic [31:0] w;
    w = '0;
    w[31:28] = 4'(op);
    w[27:23] = 5'(dst);
    w[22:21] = 2'(seg);
    w[20]    = lut[0];
    if (ldp >= 0) begin w[19] = 1'b1; w[18:14] = 5'(ldp); end
    if (ldr >= 0) begin w[13] = 1'b1; w[12:8]  = 5'(ldr); end
    return w;
  endfunction

  function automatic logic [63:0] hw(input int op, input int a = 0, input int b = 0, input int d = 0,
                                     input int len = 0, input int bank = 0, input int bzero = 0,
                                     input int pool = 0, input int barrier = 0, input int ldp = -1);
    logic [63:0] w;
    w = '0;
    w[63:60] = 4'(op);
    w[59:50] = 10'(a);
    w[49:40] = 10'(b);
    w[39:30] = 10'(d);
    w[29:22] = 8'(len);
    w[21]    = bank[0];
    w[20]    = bzero[0];
    w[19:18] = 2'(pool);
    w[17]    = barrier[0];
    if (ldp >= 0) begin w[16] = 1'b1; w[15:0] = 16'(ldp); end
    return w;
  endfunction

  // value * 2**-5, rounded toward minus infinity, saturated to [-128, 127]
  function automatic int rq(input longint v);
    longint s;
    s = v / 32;
    if (v < 0 && (v % 32) != 0) s = s - 1;
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return int'(s);
  endfunction

  function automatic int sat8(input int v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return v;
  endfunction

  function automatic int relu(input int v);
    return v < 0 ? 0 : v;
  endfunction

  function automatic int s8(input logic [7:0] b);
    return int'($signed(b));
  endfunction

  // small random Fix-8 value in [-r, r]
  function automatic int rnd8(input int r);
    return int'($urandom_range(2*r, 0)) - r;
  endfunction

endpackage

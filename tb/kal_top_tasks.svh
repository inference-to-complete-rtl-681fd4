// kal_top_tasks.svh: stimulus and reference model shared by the two
// end-to-end testbenches of kaleidoscope_top (included inside the module).
// It expects, in the including module: clocks clk_dp/clk_k, the top's ports
// as variables, `checks`/`failures`, and the localparam QT (query table depth).
//
// Programs: every FPE runs one (1,32) x (32,8) layer on input bytes 0..31
// and then idles for FPE_IDLE words (so the fast path can be overloaded);
// the HPE runs a (1,64) x (64,32) layer with ReLU. The result parsers take
// the argmax over 8 (fast) and 32 (slow) classes.

localparam logic [319:0] RSS_KEY = 320'h6d5a56da255b0ec24167253d43a38fb0d0ca2bcbae7b30b477cb2da38030f20c6a42b73bbeac01fa;
localparam int FPE_IDLE = 40;

int Wf [32][8];
int Wh [2][32][32];
logic [7:0] pkt [];

function automatic logic [31:0] toeplitz(input logic [95:0] t);
  logic [31:0] h = 0;
  for (int i = 0; i < 96; i++) if (t[95-i]) h ^= RSS_KEY[319-i -: 32];
  return h;
endfunction

// argmax with the lowest index winning ties
function automatic int argmax(input int v [32], input int n);
  int b = 0;
  for (int i = 1; i < n; i++) if (v[i] > v[b]) b = i;
  return b;
endfunction

function automatic int fast_class(input logic [511:0] x);
  int y [32];
  for (int j = 0; j < 32; j++) y[j] = 0;
  for (int j = 0; j < 8; j++) begin
    longint s = 0;
    for (int i = 0; i < 32; i++) s += longint'(s8(x[8*i +: 8])) * Wf[i][j];
    y[j] = rq(s);
  end
  return argmax(y, 8);
endfunction

function automatic int slow_class(input logic [511:0] x);
  int y [32];
  for (int j = 0; j < 32; j++) begin
    longint s0 = 0, s1 = 0;
    for (int i = 0; i < 32; i++) begin
      s0 += longint'(s8(x[8*i +: 8])) * Wh[0][i][j];
      s1 += longint'(s8(x[8*(32+i) +: 8])) * Wh[1][i][j];
    end
    y[j] = relu(sat8(rq(s0) + rq(s1)));
  end
  return argmax(y, 32);
endfunction

task automatic cfg(input int path, input int pe, input int mem, input int addr, input logic [31:0] data);
  @(negedge clk_k);
  cfg_we = 1; cfg_path = 2'(path); cfg_pe = 4'(pe); cfg_mem = 2'(mem); cfg_addr = 20'(addr); cfg_data = data;
  @(negedge clk_k); cfg_we = 0;
endtask

task automatic program_all();
  logic [63:0] hp [6];
  for (int i = 0; i < 32; i++) for (int j = 0; j < 8; j++) Wf[i][j] = rnd8(6);
  for (int t = 0; t < 2; t++) for (int i = 0; i < 32; i++) for (int j = 0; j < 32; j++) Wh[t][i][j] = rnd8(8);
  // fast path, all FPEs at once
  cfg(0, 15, 0, 0, fw(F_START));
  cfg(0, 15, 0, 1, fw(F_NOP, 0, 0, 0, 0, 0));
  cfg(0, 15, 0, 2, fw(F_MVAA, 2, 0, 0));
  for (int a = 0; a < FPE_IDLE; a++) cfg(0, 15, 0, 3 + a, fw(F_NOP));
  cfg(0, 15, 0, 3 + FPE_IDLE, fw(F_FIN, 2));
  for (int w = 0; w < 64; w++)
    cfg(0, 15, 1, w, {8'(Wf[4*(w%8)+3][w/8]), 8'(Wf[4*(w%8)+2][w/8]), 8'(Wf[4*(w%8)+1][w/8]), 8'(Wf[4*(w%8)][w/8])});
  // slow path
  hp[0] = hw(H_START);
  hp[1] = hw(H_NOP, 0, 0, 0, 0, 0, 0, 0, 0, 0);
  hp[2] = hw(H_MM, 0, 0, 0, 1, 0, 0, 0, 0, 1);
  hp[3] = hw(H_MM, 1, 0, 0, 1, 1);
  hp[4] = hw(H_ACCA, 0, 0, 4, 1, 0, 0, 0, 1);
  hp[5] = hw(H_FIN, 4);
  for (int a = 0; a < 6; a++) begin
    cfg(1, 15, 0, 2*a, hp[a][31:0]); cfg(1, 15, 0, 2*a + 1, hp[a][63:32]);
  end
  for (int t = 0; t < 2; t++) for (int i = 0; i < 32; i++) for (int w = 0; w < 8; w++)
    cfg(1, 15, 1, (t*32 + i)*8 + w,
        {8'(Wh[t][i][4*w+3]), 8'(Wh[t][i][4*w+2]), 8'(Wh[t][i][4*w+1]), 8'(Wh[t][i][4*w])});
  for (int b = 0; b < 256; b++) cfg(1, 15, 2, b, 32'(s8(8'(b)) < 0 ? 0 : b));
  cfg(2, 0, 0, 0, 32'd8);
  cfg(2, 0, 0, 1, 32'd32);
endtask

// mirror one packet (1..n beats) on the data-plane clock
task automatic mirror_pkt();
  int nb;
  nb = (pkt.size() + 63) / 64;
  for (int b = 0; b < nb; b++) begin
    @(negedge clk_dp);
    mirror_valid = 1; mirror_last = (b == nb - 1); mirror_data = '0; mirror_keep = '0;
    for (int i = 0; i < 64; i++)
      if (b*64 + i < pkt.size()) begin mirror_data[8*i +: 8] = pkt[b*64 + i]; mirror_keep[i] = 1; end
  end
  @(negedge clk_dp); mirror_valid = 0; mirror_last = 0;
endtask

// a flow: its 5-tuple and the model's view of it
typedef struct {
  logic [31:0] sip, dip;
  logic [15:0] sp, dp;
  int          proto;
  int          idx;
  int          npkt;
  int          fast_cls, slow_cls;
} flow_t;

function automatic flow_t new_flow(input int proto);
  flow_t f;
  f.sip = $urandom; f.dip = $urandom; f.sp = 16'($urandom); f.dp = 16'($urandom);
  f.proto = proto; f.npkt = 0; f.fast_cls = -1; f.slow_cls = -1;
  f.idx = int'(toeplitz({f.sip, f.dip, f.sp, f.dp})) % QT;
  return f;
endfunction

// one single-beat packet of flow f; returns the 64 bytes the NN gets
task automatic flow_pkt(inout flow_t f, output logic [511:0] x);
  int l4, pay, n;
  l4 = 34;
  pay = (f.proto == 6) ? l4 + 20 : l4 + 8;
  n = 64;
  pkt = new[n];
  foreach (pkt[i]) pkt[i] = 8'($urandom);
  pkt[12] = 8'h08; pkt[13] = 8'h00; pkt[14] = 8'h45; pkt[23] = 8'(f.proto);
  {pkt[26], pkt[27], pkt[28], pkt[29]} = f.sip;
  {pkt[30], pkt[31], pkt[32], pkt[33]} = f.dip;
  {pkt[l4], pkt[l4+1]} = f.sp;
  {pkt[l4+2], pkt[l4+3]} = f.dp;
  if (f.proto == 6) pkt[l4+12] = 8'h50;
  x = '0;
  x[7:0] = pkt[l4]; x[15:8] = pkt[l4+1]; x[23:16] = pkt[l4+2]; x[31:24] = pkt[l4+3];
  x[39:32] = 8'(f.proto);
  for (int i = 0; i < 59; i++) x[8*(5+i) +: 8] = (pay + i < n) ? pkt[pay + i] : 8'd0;
  f.npkt++;
  if (f.npkt == 1)  f.fast_cls = fast_class(x);
  if (f.npkt == 17) f.slow_cls = slow_class(x);
  mirror_pkt();
endtask

task automatic arp_pkt();
  pkt = new[60];
  foreach (pkt[i]) pkt[i] = 8'($urandom);
  pkt[12] = 8'h08; pkt[13] = 8'h06;
  mirror_pkt();
endtask

// data-plane query; checks the reply comes exactly 5 clk_dp cycles later
task automatic query(input int idx, output logic hit, output logic slow, output int cls);
  @(negedge clk_dp);
  query_valid = 1; query_idx = 16'(idx);
  for (int c = 1; c <= 5; c++) begin
    @(posedge clk_dp); #1;
    if (c == 1) query_valid = 0;
    checks++;
    if (reply_valid != (c == 5)) begin failures++; $display("query reply_valid=%0d at cycle %0d", reply_valid, c); end
  end
  hit = reply_hit; slow = reply_slow; cls = int'(reply_cls);
endtask

task automatic wait_idle();
  // the paths are idle when no queue holds a job and the done counters settle
  int stable = 0;
  logic [31:0] last = '1;
  while (stable < 200) begin
    @(posedge clk_k);
    if (pe_queues_empty && (fast_done_cnt + slow_done_cnt) == last) stable++;
    else stable = 0;
    last = fast_done_cnt + slow_done_cnt;
  end
endtask

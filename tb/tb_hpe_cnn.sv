// tb_hpe_cnn: a small convolution-shaped network on one HPE. The 64 input
// bytes are taken as 2 positions x 32 channels (RAM1 rows 0 and 1).
//   * Layer 1 is a 1x1 convolution: one MM of len 2 multiplies both rows by
//     tile 0 into RAM2 rows 0-1.
//   * ACCP (with bzero, so RAM3 counts as zero) applies ReLU and max-pools
//     the 2 positions into RAM1 row 4.
//   * Layer 2 sums two (32, 32) tiles: MM h*W1 into RAM2 row 2 and MM h*W2
//     into RAM3 row 1. ACC (no table, bank 1) adds them back into RAM2 row 3,
//     the chaining path. ACCA (bzero) applies ReLU into RAM1 row 5, which FIN
//     returns.
// This covers the parts tb_hpe does not: multi-row MM, pooling, bzero, ACC
// with no table, the bank-1 write-back and barriers between dependent
// engines. Model:
//   h = max(relu(rq(x0 * W0)), relu(rq(x1 * W0)))
//   y = relu(sat8(rq(h * W1) + rq(h * W2)))
// The test also checks that every job takes the same number of cycles.
module tb_hpe_cnn;
  import kal_tb_pkg::*;
  import kal_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable, job_valid, job_ready, res_valid, res_ready, cfg_we;
  logic [1:0] cfg_mem;
  logic [19:0] cfg_addr;
  logic [31:0] cfg_data;
  job_t job;
  pe_result_t res;
  hpe #(.PCACHE_BYTES(8192)) dut (.clk, .rst_n, .enable, .job_valid, .job_ready, .job,
    .res_valid, .res_ready, .res, .cfg_we, .cfg_mem, .cfg_addr, .cfg_data);

  int W [3][N][N];     // tile t, row i (input), column j (output)

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cfg(input int mem, input int addr, input logic [31:0] data);
    @(negedge clk); cfg_we = 1; cfg_mem = 2'(mem); cfg_addr = 20'(addr); cfg_data = data;
    @(negedge clk); cfg_we = 0;
  endtask

  localparam int NP = 9;
  logic [63:0] prog [NP];
  initial begin
    //             op      a  b  d  len bank bzero pool barrier ldp
    prog[0] = hw(H_START);
    prog[1] = hw(H_NOP,   0, 0, 0, 0,  0,   0,    0,   0,      0);
    prog[2] = hw(H_MM,    0, 0, 0, 2,  0,   0,    0,   0,      1);
    prog[3] = hw(H_ACCP,  0, 0, 4, 2,  0,   1,    1,   1);
    prog[4] = hw(H_MM,    4, 0, 2, 1,  0,   0,    0,   1,      2);
    prog[5] = hw(H_MM,    4, 0, 1, 1,  1,   0,    0,   0);
    prog[6] = hw(H_ACC,   2, 1, 3, 1,  1,   0,    0,   1);
    prog[7] = hw(H_ACCA,  3, 0, 5, 1,  0,   1,    0,   1);
    prog[8] = hw(H_FIN,   5);
  end

  logic [255:0] exp_q [$];
  int           hash_q [$];
  longint       t_acc [$];
  longint       lat0 = -1;
  int           got = 0, njobs = 0;

  function automatic logic [255:0] model(input logic [511:0] x);
    logic [255:0] y;
    int h [N];
    for (int j = 0; j < N; j++) begin
      longint s0 = 0, s1 = 0;
      int h0, h1;
      for (int i = 0; i < N; i++) begin
        s0 += longint'(s8(x[8*i +: 8])) * W[0][i][j];
        s1 += longint'(s8(x[8*(N+i) +: 8])) * W[0][i][j];
      end
      h0 = relu(rq(s0)); h1 = relu(rq(s1));
      h[j] = h0 > h1 ? h0 : h1;
    end
    for (int j = 0; j < N; j++) begin
      longint s1 = 0, s2 = 0;
      for (int i = 0; i < N; i++) begin
        s1 += longint'(h[i]) * W[1][i][j];
        s2 += longint'(h[i]) * W[2][i][j];
      end
      y[8*j +: 8] = 8'(relu(sat8(rq(s1) + rq(s2))));
    end
    return y;
  endfunction

  always @(posedge clk) begin
    if (rst_n && job_valid && job_ready) begin
      exp_q.push_back(model(job.bytes)); hash_q.push_back(int'(job.hash)); t_acc.push_back($time);
      njobs++;
    end
    if (rst_n && res_valid && res_ready) begin
      checks += 2;
      if (res.data !== exp_q[0]) begin
        failures++; $display("job %0d: got %h\n          exp %h", got, res.data, exp_q[0]);
      end
      if (res.hash !== 32'(hash_q[0])) begin failures++; $display("hash"); end
      void'(exp_q.pop_front()); void'(hash_q.pop_front()); got++;
    end
  end
  logic res_valid_d;
  always @(posedge clk) begin
    res_valid_d <= res_valid;
    if (rst_n && res_valid && !res_valid_d) begin
      longint l;
      l = ($time - t_acc[0]) / 10;
      if (lat0 < 0) $display("first result at %0t, job accepted at %0t", $time, t_acc[0]);
      if (lat0 < 0) begin lat0 = l; $display("HPE job latency: %0d cycles", l); end
      checks++;
      if (l != lat0) begin failures++; $display("latency %0d, first job %0d", l, lat0); end
      void'(t_acc.pop_front());
    end
  end

  initial begin
    enable = 0; job_valid = 0; job = '0; res_ready = 0; cfg_we = 0; cfg_mem = 0;
    cfg_addr = 0; cfg_data = 0; res_valid_d = 0;
    for (int t = 0; t < 3; t++) for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
      W[t][i][j] = rnd8(8);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int a = 0; a < NP; a++) begin
      cfg(0, 2*a, prog[a][31:0]); cfg(0, 2*a + 1, prog[a][63:32]);
    end
    // pCache row t*N + i holds W[t][i][0..N-1], 8 words per row
    for (int t = 0; t < 3; t++) for (int i = 0; i < N; i++) for (int w = 0; w < 8; w++)
      cfg(1, (t*N + i)*8 + w, {8'(W[t][i][4*w+3]), 8'(W[t][i][4*w+2]), 8'(W[t][i][4*w+1]), 8'(W[t][i][4*w])});
    for (int b = 0; b < 256; b++) cfg(2, b, 32'(s8(8'(b)) < 0 ? 0 : b));
    @(negedge clk); enable = 1;
    for (int n = 0; n < 20; n++) begin
      @(negedge clk);
      repeat ($urandom_range(40, 0)) @(negedge clk);
      job_valid = 1; job.hash = $urandom;
      for (int i = 0; i < 64; i++) job.bytes[8*i +: 8] = 8'(rnd8(n < 3 ? 10 : 60));
      @(posedge clk); while (!job_ready) @(posedge clk);
      @(negedge clk); job_valid = 0;
    end
    wait (got == 20);
    repeat (5) @(posedge clk);
    checks++;
    if (njobs != 20) begin failures++; $display("jobs %0d", njobs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(negedge clk) res_ready <= $urandom_range(3, 0) != 0;
endmodule

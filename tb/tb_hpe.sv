// tb_hpe: runs a (1,64) x (64,32) fully-connected layer with ReLU on one HPE.
// The 64-byte input arrives in RAM1 rows 0 and 1 (START). Two weight tiles
// are loaded (LDP), and each row is multiplied by its tile (MM): the first
// result goes to RAM2, the second to RAM3. After a barrier, ACCA adds RAM2 and
// RAM3, applies the ReLU table and writes RAM1 row 4, which FIN returns.
// The second LDP overlaps the first MM, exercising the shadow weights. Each
// result is checked against
//   relu(sat8(rq(x[0:32] * W0) + rq(x[32:64] * W1)))
// with random back-pressure. The test also checks that every job takes the
// same number of cycles (the program is data-independent).
module tb_hpe;
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

  int W [2][N][N];     // tile t, row i (input), column j (output)

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cfg(input int mem, input int addr, input logic [31:0] data);
    @(negedge clk); cfg_we = 1; cfg_mem = 2'(mem); cfg_addr = 20'(addr); cfg_data = data;
    @(negedge clk); cfg_we = 0;
  endtask

  logic [63:0] prog [6];
  initial begin
    prog[0] = hw(H_START);
    prog[1] = hw(H_NOP, 0, 0, 0, 0, 0, 0, 0, 0, 0);
    prog[2] = hw(H_MM, 0, 0, 0, 1, 0, 0, 0, 0, 1);
    prog[3] = hw(H_MM, 1, 0, 0, 1, 1);
    prog[4] = hw(H_ACCA, 0, 0, 4, 1, 0, 0, 0, 1);
    prog[5] = hw(H_FIN, 4);
  end

  logic [255:0] exp_q [$];
  int           hash_q [$];
  longint       t_acc [$];
  longint       lat0 = -1;
  int           got = 0, njobs = 0;

  function automatic logic [255:0] model(input logic [511:0] x);
    logic [255:0] y;
    for (int j = 0; j < N; j++) begin
      longint s0 = 0, s1 = 0;
      for (int i = 0; i < N; i++) begin
        s0 += longint'(s8(x[8*i +: 8])) * W[0][i][j];
        s1 += longint'(s8(x[8*(N+i) +: 8])) * W[1][i][j];
      end
      y[8*j +: 8] = 8'(relu(sat8(rq(s0) + rq(s1))));
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
    for (int t = 0; t < 2; t++) for (int i = 0; i < N; i++) for (int j = 0; j < N; j++)
      W[t][i][j] = rnd8(8);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int a = 0; a < 6; a++) begin
      cfg(0, 2*a, prog[a][31:0]); cfg(0, 2*a + 1, prog[a][63:32]);
    end
    // pCache row t*N + i holds W[t][i][0..N-1], 8 words per row
    for (int t = 0; t < 2; t++) for (int i = 0; i < N; i++) for (int w = 0; w < 8; w++)
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

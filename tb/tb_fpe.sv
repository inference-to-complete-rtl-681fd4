// tb_fpe: runs a two-layer MLP (64 -> 16 -> 8, ReLU after layer 1) on one
// FPE. The test programs the iCache, pCache and activation LUT over the
// configuration port, then streams random jobs with random result
// back-pressure. Each result is compared with a software model using the
// same Fix-8 (Q2.5) arithmetic: exact 32-bit sums, then requantization by
// 2**-5 with saturation. The latency from job acceptance to res_valid is
// checked against the 16 cycles this 12-word program takes.
module tb_fpe;
  import kal_tb_pkg::*;
  import kal_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable, job_valid, job_ready, res_valid, res_ready, cfg_we;
  logic [1:0] cfg_mem;
  logic [15:0] cfg_addr;
  logic [31:0] cfg_data;
  job_t job;
  pe_result_t res;
  fpe dut (.clk, .rst_n, .enable, .job_valid, .job_ready, .job, .res_valid, .res_ready, .res,
           .cfg_we, .cfg_mem, .cfg_addr, .cfg_data);

  localparam int LATENCY = 16;
  int w1 [64][16];
  int w2 [16][8];
  logic [7:0] tile [5][256];      // pCache entries 0..4

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cfg(input int mem, input int addr, input logic [31:0] data);
    @(negedge clk); cfg_we = 1; cfg_mem = 2'(mem); cfg_addr = 16'(addr); cfg_data = data;
    @(negedge clk); cfg_we = 0;
  endtask

  logic [31:0] prog [12];
  initial begin
    prog[0]  = fw(F_START);
    prog[1]  = fw(F_NOP, 0, 0, 0, 0, 0);
    prog[2]  = fw(F_MV, 0, 0, 0, 1, 1);
    prog[3]  = fw(F_MVAA, 2, 0, 1, 2, 0);
    prog[4]  = fw(F_MV, 0, 0, 0, 3, 1);
    prog[5]  = fw(F_MVAA, 2, 1, 1);
    prog[6]  = fw(F_NOP);
    prog[7]  = fw(F_NOP);
    prog[8]  = fw(F_NOP);
    prog[9]  = fw(F_NOP, 0, 0, 0, 4, 2);
    prog[10] = fw(F_MVAA, 3, 0, 0);
    prog[11] = fw(F_FIN, 3);
  end

  // expected results, in job order
  logic [63:0] exp_q [$];
  int          hash_q [$];
  longint      t_acc [$];
  longint      cyc = 0;
  int          got = 0, njobs = 0;

  function automatic logic [63:0] model(input logic [511:0] x);
    int h [16];
    logic [63:0] y;
    for (int j = 0; j < 16; j++) begin
      longint s = 0;
      for (int i = 0; i < 64; i++) s += longint'(s8(x[8*i +: 8])) * w1[i][j];
      h[j] = relu(rq(s));
    end
    for (int j = 0; j < 8; j++) begin
      longint s = 0;
      for (int i = 0; i < 16; i++) s += longint'(h[i]) * w2[i][j];
      y[8*j +: 8] = 8'(rq(s));
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
      if (res.data[63:0] !== exp_q[0]) begin
        failures++; $display("job %0d: got %h exp %h", got, res.data[63:0], exp_q[0]);
      end
      if (res.hash !== 32'(hash_q[0])) begin failures++; $display("hash"); end
      void'(exp_q.pop_front()); void'(hash_q.pop_front()); got++;
    end
  end
  // latency: res_valid first rises LATENCY cycles after the job is accepted
  logic res_valid_d;
  always @(posedge clk) begin
    res_valid_d <= res_valid;
    cyc++;
    if (rst_n && res_valid && !res_valid_d) begin
      checks++;
      if (($time - t_acc[0]) / 10 != LATENCY) begin
        failures++; $display("latency %0d, expected %0d", ($time - t_acc[0]) / 10, LATENCY);
      end
      void'(t_acc.pop_front());
    end
  end

  initial begin
    enable = 0; job_valid = 0; job = '0; res_ready = 0; cfg_we = 0; cfg_mem = 0;
    cfg_addr = 0; cfg_data = 0; res_valid_d = 0;
    for (int i = 0; i < 64; i++) for (int j = 0; j < 16; j++) w1[i][j] = rnd8(6);
    for (int i = 0; i < 16; i++) for (int j = 0; j < 8; j++) w2[i][j] = rnd8(12);
    // tile 2*t + s: inputs 32s..32s+31 of layer 1, outputs 8t..8t+7
    for (int t = 0; t < 2; t++) for (int s = 0; s < 2; s++)
      for (int j = 0; j < 8; j++) for (int i = 0; i < 32; i++)
        tile[2*t+s][j*32+i] = 8'(w1[32*s+i][8*t+j]);
    for (int j = 0; j < 8; j++) for (int i = 0; i < 32; i++)
      tile[4][j*32+i] = (i < 16) ? 8'(w2[i][j]) : 8'h00;   // unused rows are zero
    repeat (3) @(posedge clk); rst_n = 1;
    for (int a = 0; a < 12; a++) cfg(0, a, prog[a]);
    for (int e = 0; e < 5; e++) for (int w = 0; w < 64; w++)
      cfg(1, e*64 + w, {tile[e][4*w+3], tile[e][4*w+2], tile[e][4*w+1], tile[e][4*w]});
    for (int b = 0; b < 256; b++) cfg(2, b, 32'(s8(8'(b)) < 0 ? 0 : b));
    @(negedge clk); enable = 1;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      repeat ($urandom_range(6, 0)) @(negedge clk);
      job_valid = 1; job.hash = $urandom;
      for (int i = 0; i < 16; i++) job.bytes[32*i +: 32] = $urandom;
      if (n < 5) for (int i = 0; i < 64; i++) job.bytes[8*i +: 8] = 8'(rnd8(20));
      @(posedge clk); while (!job_ready) @(posedge clk);
      @(negedge clk); job_valid = 0;
    end
    wait (got == 40 || cyc > 15000);
    repeat (5) @(posedge clk);
    checks++;
    if (got != 40 || njobs != 40) begin failures++; $display("got %0d of %0d", got, njobs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(negedge clk) res_ready <= $urandom_range(3, 0) != 0;
endmodule

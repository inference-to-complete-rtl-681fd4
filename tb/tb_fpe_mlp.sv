// tb_fpe_mlp: a three-layer MLP of 64 -> 64 -> 32 -> 8 (ReLU, ReLU, none) on
// one FPE. Its 6400 bytes of weights are the size of the largest fast-path
// model evaluated for this design (6.4 KB) and fill 25 of the 32 pCache
// tiles. The program is generated here from the layer shapes:
//   * each 8-output group is a chain of 32-input steps (MV ... MVAA);
//   * a step's operands are loaded (LDR/LDP) by the word before it;
//   * three NOPs separate layers, to respect the write-back distance.
// Each result is checked against a software model, and so is the latency.
// Because the pipeline is already empty when FIN is fetched, res_valid comes
// (FIN index + 3) cycles after the job is accepted: 41 cycles, 164 ns at 250 MHz.
module tb_fpe_mlp;
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

  localparam int NL = 3;
  localparam int IN_W  [NL] = '{64, 64, 32};
  localparam int OUT_W [NL] = '{64, 32, 8};
  localparam int IN_E  [NL] = '{0, 2, 4};      // first regfile entry of each layer's input
  localparam int OUT_E [NL] = '{2, 4, 5};      // first regfile entry of its output
  localparam int LUT   [NL] = '{1, 1, 0};

  int W [NL][64][64];
  logic [7:0] tiles [32][256];
  int ntiles = 0;
  logic [31:0] prog [$];
  int latency;

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cfg(input int mem, input int addr, input logic [31:0] data);
    @(negedge clk); cfg_we = 1; cfg_mem = 2'(mem); cfg_addr = 16'(addr); cfg_data = data;
    @(negedge clk); cfg_we = 0;
  endtask

  // build tiles and program
  task automatic build();
    int ldr_q, ldp_q, op_q, dst_q, seg_q, lut_q;
    bit have;
    prog.push_back(fw(F_START));
    have = 0;
    for (int l = 0; l < NL; l++) begin
      for (int g = 0; g < OUT_W[l] / 8; g++) begin
        for (int s = 0; s < IN_W[l] / 32; s++) begin
          int t, op;
          t = ntiles++;
          for (int j = 0; j < 8; j++) for (int i = 0; i < 32; i++)
            tiles[t][j*32 + i] = 8'(W[l][32*s + i][8*g + j]);
          op = (s == IN_W[l]/32 - 1) ? F_MVAA : (s == 0 ? F_MV : F_MVA);
          // this word: previous step's operation + this step's loads
          if (have) prog.push_back(fw(op_q, dst_q, seg_q, lut_q, t, IN_E[l] + s));
          else      prog.push_back(fw(F_NOP, 0, 0, 0, t, IN_E[l] + s));
          have = 1; op_q = op; dst_q = OUT_E[l] + g / 4; seg_q = g % 4; lut_q = LUT[l];
        end
      end
      // finish the layer: last operation, then the write-back distance
      prog.push_back(fw(op_q, dst_q, seg_q, lut_q));
      have = 0;
      repeat (3) prog.push_back(fw(F_NOP));
    end
    prog.push_back(fw(F_FIN, OUT_E[NL-1]));
    // the trailing NOPs have drained the pipeline, so FIN needs 3 more cycles
    latency = prog.size() - 1 + 3;
  endtask

  function automatic logic [63:0] model(input logic [511:0] x);
    int a [64], b [64];
    for (int i = 0; i < 64; i++) a[i] = s8(x[8*i +: 8]);
    for (int l = 0; l < NL; l++) begin
      for (int j = 0; j < OUT_W[l]; j++) begin
        longint s = 0;
        for (int i = 0; i < IN_W[l]; i++) s += longint'(a[i]) * W[l][i][j];
        b[j] = LUT[l] ? relu(rq(s)) : rq(s);
      end
      a = b;
    end
    for (int j = 0; j < 8; j++) model[8*j +: 8] = 8'(a[j]);
  endfunction

  logic [63:0] exp_q [$];
  longint t_acc [$];
  int got = 0;
  logic res_valid_d;
  always @(posedge clk) begin
    res_valid_d <= res_valid;
    if (rst_n && job_valid && job_ready) begin exp_q.push_back(model(job.bytes)); t_acc.push_back($time); end
    if (rst_n && res_valid && !res_valid_d) begin
      checks++;
      if (($time - t_acc[0]) / 10 != latency) begin
        failures++; $display("latency %0d exp %0d", ($time - t_acc[0]) / 10, latency);
      end
      void'(t_acc.pop_front());
    end
    if (rst_n && res_valid && res_ready) begin
      checks++;
      if (res.data[63:0] !== exp_q[0]) begin failures++; $display("job %0d: got %h exp %h", got, res.data[63:0], exp_q[0]); end
      void'(exp_q.pop_front()); got++;
    end
  end

  initial begin
    enable = 0; job_valid = 0; job = '0; res_ready = 0; cfg_we = 0; cfg_mem = 0;
    cfg_addr = 0; cfg_data = 0; res_valid_d = 0;
    for (int l = 0; l < NL; l++) for (int i = 0; i < 64; i++) for (int j = 0; j < 64; j++)
      W[l][i][j] = rnd8(l == 0 ? 5 : 10);
    build();
    $display("MLP 64-64-32-8: %0d weight bytes in %0d tiles, %0d program words, %0d cycles per job",
             ntiles * 256, ntiles, prog.size(), latency);
    repeat (3) @(posedge clk); rst_n = 1;
    foreach (prog[a]) cfg(0, a, prog[a]);
    for (int e = 0; e < ntiles; e++) for (int w = 0; w < 64; w++)
      cfg(1, e*64 + w, {tiles[e][4*w+3], tiles[e][4*w+2], tiles[e][4*w+1], tiles[e][4*w]});
    for (int b = 0; b < 256; b++) cfg(2, b, 32'(s8(8'(b)) < 0 ? 0 : b));
    @(negedge clk); enable = 1;
    for (int n = 0; n < 12; n++) begin
      @(negedge clk);
      job_valid = 1; job.hash = $urandom;
      for (int i = 0; i < 64; i++) job.bytes[8*i +: 8] = 8'(rnd8(40));
      @(posedge clk); while (!job_ready) @(posedge clk);
      @(negedge clk); job_valid = 0;
    end
    wait (got == 12);
    checks++;
    if (ntiles != 25) begin failures++; $display("tiles %0d", ntiles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(negedge clk) res_ready <= $urandom_range(3, 0) != 0;
endmodule

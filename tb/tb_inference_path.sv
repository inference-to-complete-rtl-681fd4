// tb_inference_path: one inference path with four FPEs and 4-deep job
// queues. All FPEs get the same one-layer program at once (cfg_pe = 15):
// y = rq(x[0:32] * W), 8 outputs. Phase 1 sends jobs slowly and checks the
// round-robin dispatch order (PE 0, 1, 2, 3, 0, ...). Phase 2 sends bursts
// faster than the PEs can serve them, so queues fill and jobs are dropped.
// Every result must match a job that was sent, by hash and value, and
// results + drops must equal jobs. The drop and done counters are checked,
// and every PE must have been used.
module tb_inference_path;
  import kal_tb_pkg::*;
  import kal_pkg::*;
  localparam int NPE = 4, QD = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enable, job_valid, res_valid, res_ready, cfg_we, all_busy_seen;
  logic [3:0] cfg_pe;
  logic [1:0] cfg_mem;
  logic [19:0] cfg_addr;
  logic [31:0] cfg_data, drop_cnt, done_cnt;
  logic [NPE-1:0] q_nonempty;
  job_t job;
  pe_result_t res;
  inference_path #(.IS_HPE(1'b0), .NPE(NPE), .Q_DEPTH(QD)) dut (.clk, .rst_n, .enable,
    .job_valid, .job, .res_valid, .res_ready, .res, .cfg_we, .cfg_pe, .cfg_mem, .cfg_addr,
    .cfg_data, .drop_cnt, .done_cnt, .q_nonempty, .all_busy_seen);

  int W [32][8];
  logic [63:0] expv [int];      // by hash
  int nsent = 0, nres = 0, ndrop = 0;
  logic [NPE-1:0] used = '0;
  int push_log [$];

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cfg(input int mem, input int addr, input logic [31:0] data);
    @(negedge clk); cfg_we = 1; cfg_mem = 2'(mem); cfg_addr = 20'(addr); cfg_data = data;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic logic [63:0] model(input logic [511:0] x);
    logic [63:0] y;
    for (int j = 0; j < 8; j++) begin
      longint s = 0;
      for (int i = 0; i < 32; i++) s += longint'(s8(x[8*i +: 8])) * W[i][j];
      y[8*j +: 8] = 8'(rq(s));
    end
    return y;
  endfunction

  // one job; with back_to_back the next call drives the next job in the
  // following cycle (one job per cycle)
  task automatic send_job(input bit back_to_back = 0);
    logic [31:0] h;
    @(negedge clk);
    h = $urandom;
    while (expv.exists(int'(h))) h = $urandom;
    job_valid = 1; job.hash = h;
    for (int i = 0; i < 16; i++) job.bytes[32*i +: 32] = $urandom;
    expv[int'(h)] = model(job.bytes);
    nsent++;
    if (!back_to_back) begin @(negedge clk); job_valid = 0; end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (job_valid && dut.q_push == '0) ndrop++;
    if (dut.q_push != '0) begin
      used |= dut.q_push;
      for (int p = 0; p < NPE; p++) if (dut.q_push[p]) push_log.push_back(p);
    end
    if (res_valid && res_ready) begin
      checks++;
      if (!expv.exists(int'(res.hash))) begin failures++; $display("result for unknown hash %h", res.hash); end
      else begin
        if (res.data[63:0] !== expv[int'(res.hash)]) begin
          failures++; $display("hash %h: got %h exp %h", res.hash, res.data[63:0], expv[int'(res.hash)]);
        end
        expv.delete(int'(res.hash));
      end
      nres++;
    end
  end

  initial begin
    logic [31:0] prog [4];
    enable = 0; job_valid = 0; job = '0; cfg_we = 0; cfg_pe = 4'hf; cfg_mem = 0; cfg_addr = 0; cfg_data = 0;
    for (int i = 0; i < 32; i++) for (int j = 0; j < 8; j++) W[i][j] = rnd8(5);
    prog[0] = fw(F_START);
    prog[1] = fw(F_NOP, 0, 0, 0, 0, 0);
    prog[2] = fw(F_MVAA, 2, 0, 0);
    prog[3] = fw(F_FIN, 2);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int a = 0; a < 4; a++) cfg(0, a, prog[a]);
    for (int w = 0; w < 64; w++)
      cfg(1, w, {8'(W[4*(w%8)+3][w/8]), 8'(W[4*(w%8)+2][w/8]), 8'(W[4*(w%8)+1][w/8]), 8'(W[4*(w%8)][w/8])});
    // identity-free LUT: program entries anyway, unused (lut bit 0)
    @(negedge clk); enable = 1;
    // phase 1: sparse jobs, round-robin order
    for (int n = 0; n < 12; n++) begin send_job(); repeat (30) @(negedge clk); end
    checks++;
    for (int n = 0; n < 12; n++)
      if (push_log[n] != n % NPE) begin failures++; $display("job %0d went to PE %0d", n, push_log[n]); break; end
    checks++;
    if (drop_cnt != 0 || all_busy_seen) begin failures++; $display("drop in sparse phase"); end
    // phase 2: bursts
    for (int b = 0; b < 6; b++) begin
      repeat (30) send_job(1);
      @(negedge clk); job_valid = 0;
      repeat ($urandom_range(200, 20)) @(negedge clk);
    end
    repeat (300) @(negedge clk);
    checks += 6;
    if (nres + ndrop != nsent) begin failures++; $display("results %0d + drops %0d != sent %0d", nres, ndrop, nsent); end
    if (drop_cnt != 32'(ndrop)) begin failures++; $display("drop_cnt %0d exp %0d", drop_cnt, ndrop); end
    if (done_cnt != 32'(nres)) begin failures++; $display("done_cnt %0d exp %0d", done_cnt, nres); end
    if (ndrop == 0 || !all_busy_seen) begin failures++; $display("no drops in burst phase"); end
    if (used != '1) begin failures++; $display("PEs used %b", used); end
    if (expv.size() != ndrop) begin failures++; $display("%0d accepted jobs without result", expv.size() - ndrop); end
    $display("sent %0d results %0d dropped %0d", nsent, nres, ndrop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(negedge clk) res_ready <= $urandom_range(4, 0) != 0;
endmodule

// tb_bypass_if: data-plane clock 3.1 ns, co-processor clock 4 ns, unrelated.
// Sends packets of 1..7 beats back to back from the data-plane side while
// the reader stalls at random; checks that each admitted packet arrives
// with its first min(len, 4) beats in order and `last` on the final kept
// beat, that packets are dropped whole when the FIFO lacks room, and that
// drop_cnt matches the packets missing at the output.
module tb_bypass_if;
  logic clk_dp = 0, clk_k = 0, rst_dp_n = 0, rst_k_n = 0;
  always #1.55 clk_dp = ~clk_dp;
  always #2 clk_k = ~clk_k;
  int checks = 0, failures = 0;
  logic [511:0] s_data, m_data;
  logic [63:0] s_keep, m_keep;
  logic s_valid, s_last, m_valid, m_last, m_ready;
  logic [31:0] drop_cnt;
  bypass_if #(.DEPTH(16), .HEAD_BEATS(4)) dut (.clk_dp, .rst_dp_n, .s_data, .s_keep, .s_valid, .s_last,
    .drop_cnt, .clk_k, .rst_k_n, .m_data, .m_keep, .m_valid, .m_last, .m_ready);

  initial begin
    #200000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int NPKT = 300;
  int len [NPKT];
  int sent_done = 0, got_pkts = 0, next_id = 0;

  // beat word: {packet id, beat index}
  initial begin
    s_valid = 0; s_last = 0; s_data = 0; s_keep = 0;
    #20 rst_dp_n = 1;
    for (int p = 0; p < NPKT; p++) begin
      len[p] = $urandom_range(7, 1);
      for (int b = 0; b < len[p]; b++) begin
        @(negedge clk_dp);
        s_valid = 1; s_last = (b == len[p] - 1); s_keep = '1;
        s_data = '0; s_data[31:0] = 32'(p); s_data[63:32] = 32'(b); s_data[511:480] = 32'hfeed0000 | 32'(p);
      end
      if ($urandom_range(3, 0) == 0) begin
        @(negedge clk_dp); s_valid = 0; s_last = 0;
        repeat ($urandom_range(30, 0)) @(negedge clk_dp);
      end
    end
    @(negedge clk_dp); s_valid = 0;
    sent_done = 1;
  end

  initial begin
    int pid, beat;
    m_ready = 0;
    #20 rst_k_n = 1;
    pid = -1; beat = 0;
    forever begin
      @(negedge clk_k);
      m_ready = $urandom_range(2, 0) != 0;
      #0.1;
      if (m_valid && m_ready) begin
        int p, b;
        p = int'(m_data[31:0]); b = int'(m_data[63:32]);
        if (beat == 0) begin
          checks++;
          if (p <= pid) begin failures++; $display("packet order %0d after %0d", p, pid); end
          pid = p;
          got_pkts++;
        end
        checks += 3;
        if (p != pid || b != beat) begin failures++; $display("beat %0d/%0d exp %0d/%0d", p, b, pid, beat); end
        if (m_data[511:480] !== (32'hfeed0000 | 32'(p))) begin failures++; $display("data"); end
        if (m_last != (beat == (len[pid] < 4 ? len[pid] : 4) - 1)) begin failures++; $display("last flag p=%0d b=%0d", p, b); end
        beat = m_last ? 0 : beat + 1;
      end
    end
  end

  initial begin
    wait (sent_done);
    #3000;
    checks += 2;
    if (got_pkts + int'(drop_cnt) != NPKT) begin
      failures++; $display("received %0d + dropped %0d != %0d", got_pkts, drop_cnt, NPKT);
    end
    if (drop_cnt == 0) begin failures++; $display("no drop exercised"); end
    $display("received %0d dropped %0d", got_pkts, drop_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

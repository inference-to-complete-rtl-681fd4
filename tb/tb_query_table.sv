// tb_query_table: writes rules on the co-processor clock and queries them on
// a separate data-plane clock. Checks the clear after reset (all misses),
// hit/slow/class contents against a model, overwrite of an index, and that
// every answer appears exactly LATENCY (5) data-plane cycles after its query.
module tb_query_table;
  import kal_tb_pkg::*;
  import kal_pkg::*;
  localparam int DEPTH = 256, LAT = 5;
  logic clk_k = 0, clk_dp = 0, rst_k_n = 0, rst_dp_n = 0;
  always #4 clk_k = ~clk_k;      // 125 MHz-like co-processor clock
  always #3 clk_dp = ~clk_dp;    // faster data-plane clock
  int checks = 0, failures = 0;
  logic wr_valid, wr_ready, q_valid, r_valid, r_hit, r_slow;
  logic [7:0] q_idx, r_cls;
  rule_t wr_rule;
  query_table #(.DEPTH(DEPTH), .LATENCY(LAT)) dut (.clk_k, .rst_k_n, .wr_valid, .wr_ready, .wr_rule,
    .clk_dp, .rst_dp_n, .q_valid, .q_idx, .r_valid, .r_hit, .r_slow, .r_cls);

  logic [9:0] model [DEPTH];     // {hit, slow, cls}
  longint cyc = 0;
  typedef struct { longint t; logic [9:0] e; } q_t;
  // a query driven after edge C is captured at edge C+1; its reply is valid
  // after edge C+5 and seen by the checker at edge C+6
  q_t pend [$];

  initial begin
    #400000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic query(input int idx);
    @(negedge clk_dp); q_valid = 1; q_idx = 8'(idx);
    pend.push_back('{cyc + LAT + 1, model[idx]});
    @(negedge clk_dp); q_valid = 0;
  endtask

  task automatic write_rule(input int idx, input bit slow, input int cls);
    @(negedge clk_k); wr_valid = 1; wr_rule = '{idx: 16'(idx), slow: slow, cls: 8'(cls)};
    @(posedge clk_k); #1 wr_valid = 0;
    model[idx] = {1'b1, slow, 8'(cls)};
  endtask

  always @(posedge clk_dp) begin
    cyc++;
    if (!rst_dp_n) ;
    else if (pend.size() != 0 && pend[0].t == cyc) begin
      checks++;
      if (!r_valid) begin failures++; $display("no reply at cycle %0d", cyc); end
      else begin
        checks++;
        if ({r_hit, r_slow, r_cls} !== pend[0].e) begin
          failures++; $display("reply %b exp %b", {r_hit, r_slow, r_cls}, pend[0].e);
        end
      end
      void'(pend.pop_front());
    end else if (r_valid) begin
      checks++; failures++; $display("unexpected reply at %0d", cyc);
    end
  end

  int misses = 0;
  initial begin
    wr_valid = 0; wr_rule = '0; q_valid = 0; q_idx = 0;
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    repeat (3) @(posedge clk_k); rst_k_n = 1; rst_dp_n = 1;
    checks++;
    if (wr_ready) begin failures++; $display("ready during clear"); end
    wait (wr_ready); repeat (2) @(posedge clk_dp);
    for (int i = 0; i < 40; i++) query($urandom_range(DEPTH-1, 0));
    for (int k = 0; k < 600; k++) begin
      int idx;
      idx = $urandom_range(DEPTH-1, 0);
      case ($urandom_range(2, 0))
        0, 1: write_rule(idx, 1'($urandom), $urandom_range(31, 0));
        2: begin
          repeat (2) @(posedge clk_dp);   // let earlier writes settle across clocks
          query(idx);
        end
      endcase
    end
    // back-to-back queries: one per data-plane cycle
    repeat (4) @(posedge clk_dp);
    @(negedge clk_dp);
    for (int i = 0; i < 64; i++) begin
      q_valid = 1; q_idx = 8'(i); pend.push_back('{cyc + LAT + 1, model[i]});
      @(negedge clk_dp);
    end
    q_valid = 0;
    repeat (12) @(posedge clk_dp);
    checks++;
    if (pend.size() != 0) begin failures++; $display("%0d replies missing", pend.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

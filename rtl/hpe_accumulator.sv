// hpe_accumulator: accumulator engine of the HPE with the activation and
// pooling stages behind it (paper Fig 4: Accumulator -> Activation ->
// Pooling). On `start` it streams `len` rows: row i of RAM2 (from `a`) and
// row i of RAM3 (from `b`) are read in parallel, added element-wise with
// Fix-8 saturation (RAM3 taken as zero with `bzero`), passed through the LUT
// activation (`use_lut`) and max-pooled over windows of 2**`pool`
// consecutive rows; each pooled row is written to row d, d+1, ... of the
// destination port. One row per cycle; `busy` falls after the last write,
// len + 2 cycles after `start`. The element-wise saturation at Fix-8 between
// blocked-GEMM steps follows from the 256-bit (32 x Fix-8) RAM rows; the
// row-wise max-pool window is this design's choice.
module hpe_accumulator #(
  parameter int N  = 32,
  parameter int AW = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [AW-1:0]    a,
  input  logic [AW-1:0]    b,
  input  logic [AW-1:0]    d,
  input  logic [7:0]       len,
  input  logic             bzero,
  input  logic             use_lut,
  input  logic [1:0]       pool,
  output logic             busy,
  // read ports (RAM2 port B, RAM3 port B)
  output logic             rd_en,
  output logic [AW-1:0]    rd_addr2,
  output logic [AW-1:0]    rd_addr3,
  input  logic [N*8-1:0]   rd_data2,
  input  logic [N*8-1:0]   rd_data3,
  // destination write port
  output logic             wr_en,
  output logic [AW-1:0]    wr_addr,
  output logic [N*8-1:0]   wr_data,
  // activation table programming
  input  logic             cfg_we,
  input  logic [7:0]       cfg_addr,
  input  logic [7:0]       cfg_data
);
  import kal_pkg::*;

  logic [7:0]    issued, remaining;
  logic [AW-1:0] a_q, b_q, d_q;
  logic          bzero_q, lut_q;
  logic [1:0]    pool_q;
  logic          v1, v2;
  logic [3:0]    win_cnt;
  logic [N*8-1:0] run_max;

  assign rd_en    = busy && issued != 8'd0;
  assign rd_addr2 = a_q;
  assign rd_addr3 = b_q;

  // stage 1: sum (data from the RAMs arrives one cycle after the read)
  logic [N*32-1:0] sum_w;
  always_comb begin
    for (int i = 0; i < N; i++) begin
      fix8_t s;
      s = sat_add($signed(rd_data2[8*i +: 8]), bzero_q ? 8'sd0 : $signed(rd_data3[8*i +: 8]));
      sum_w[32*i +: 32] = 32'($signed(s)) <<< FIX_FRAC;   // act_lut rescales by 2**-5
    end
  end

  logic [N*8-1:0] act;
  act_lut #(.LANES(N)) u_act (
    .clk, .en(v1), .use_lut(lut_q), .din(sum_w), .dout(act),
    .cfg_we, .cfg_addr, .cfg_data);

  // stage 2: pooling and write
  logic [N*8-1:0] pooled;
  logic           last_in_win;
  always_comb begin
    for (int i = 0; i < N; i++) begin
      fix8_t x, m;
      x = $signed(act[8*i +: 8]);
      m = $signed(run_max[8*i +: 8]);
      pooled[8*i +: 8] = (win_cnt != 0 && m > x) ? m : x;
    end
    last_in_win = win_cnt == 4'((1 << pool_q) - 1);
  end
  assign wr_en   = v2 && last_in_win;
  assign wr_addr = d_q;
  assign wr_data = pooled;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; issued <= '0; remaining <= '0;
      v1 <= 1'b0; v2 <= 1'b0; win_cnt <= '0;
      a_q <= '0; b_q <= '0; d_q <= '0; bzero_q <= 1'b0; lut_q <= 1'b0; pool_q <= '0;
    end else begin
      v1 <= rd_en;
      v2 <= v1;
      if (start && !busy) begin
        busy <= len != 8'd0; issued <= len; remaining <= len;
        a_q <= a; b_q <= b; d_q <= d; bzero_q <= bzero; lut_q <= use_lut; pool_q <= pool;
        win_cnt <= '0;
      end else begin
        if (rd_en) begin
          issued <= issued - 1'b1;
          a_q <= a_q + 1'b1;
          b_q <= b_q + 1'b1;
        end
        if (v2) begin
          remaining <= remaining - 1'b1;
          win_cnt   <= last_in_win ? 4'd0 : win_cnt + 1'b1;
          if (last_in_win) d_q <= d_q + 1'b1;
          if (remaining == 8'd1) busy <= 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk) if (v2) run_max <= pooled;
endmodule

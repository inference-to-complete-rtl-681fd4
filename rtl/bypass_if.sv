// bypass_if: the co-processor's tap on the data-plane. It takes the mirrored
// packet stream (AXI-stream style beats, 512 bit, in the data-plane clock) and
// carries it into the co-processor's own asynchronous clock through a
// Gray-coded dual-clock FIFO. The mirror cannot be back-pressured, so only the
// first HEAD_BEATS beats of a packet are kept (the NNs read 64 raw bytes
// only), and a packet is admitted at its first beat only if the FIFO has room
// for a whole head; otherwise it is dropped and `drop_cnt` counts it, without
// any effect on the data-plane. The last kept beat carries `m_last`.
// The paper names the bypass interface and the separate clock; the head
// truncation, whole-head admission and FIFO depth are this design's choices.
module bypass_if #(
  parameter int DEPTH      = 16,
  parameter int HEAD_BEATS = 4,
  localparam int AW = $clog2(DEPTH)
) (
  // data-plane side
  input  logic          clk_dp,
  input  logic          rst_dp_n,
  input  logic [511:0]  s_data,
  input  logic [63:0]   s_keep,
  input  logic          s_valid,
  input  logic          s_last,
  output logic [31:0]   drop_cnt,
  // co-processor side
  input  logic          clk_k,
  input  logic          rst_k_n,
  output logic [511:0]  m_data,
  output logic [63:0]   m_keep,
  output logic          m_valid,
  output logic          m_last,
  input  logic          m_ready
);
  typedef struct packed {
    logic [511:0] data;
    logic [63:0]  keep;
    logic         last;
  } beat_t;

  beat_t mem [DEPTH];

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    for (int i = AW; i >= 0; i--) b[i] = (i == AW) ? g[i] : b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write side (clk_dp) ----------------
  logic [AW:0] wptr, wptr_gray, rgray_s1, rgray_s2;
  logic [AW:0] rptr, rgray_q, wgray_s1, wgray_s2;
  logic [7:0]  beat;        // beat index inside the current packet
  logic        keep_pkt;    // current packet admitted
  logic [AW:0] used_w;
  logic        admit, wr;

  assign used_w = wptr - gray2bin(rgray_s2);
  assign admit  = (DEPTH - int'(used_w)) >= HEAD_BEATS;
  assign wr     = s_valid && (beat == 0 ? admit : (keep_pkt && int'(beat) < HEAD_BEATS));

  always_ff @(posedge clk_dp or negedge rst_dp_n) begin
    if (!rst_dp_n) begin
      wptr <= '0; wptr_gray <= '0; rgray_s1 <= '0; rgray_s2 <= '0;
      beat <= '0; keep_pkt <= 1'b0; drop_cnt <= '0;
    end else begin
      {rgray_s2, rgray_s1} <= {rgray_s1, rgray_q};
      if (s_valid) begin
        if (beat == 0) begin
          keep_pkt <= admit;
          if (!admit) drop_cnt <= drop_cnt + 1'b1;
        end
        beat <= s_last ? 8'd0 : (beat == 8'hff ? beat : beat + 1'b1);
      end
      if (wr) begin
        wptr      <= wptr + 1'b1;
        wptr_gray <= bin2gray(wptr + 1'b1);
      end
    end
  end

  always_ff @(posedge clk_dp)
    if (wr) mem[wptr[AW-1:0]] <= '{data: s_data, keep: s_keep,
                                   last: s_last || beat == 8'(HEAD_BEATS-1)};

  // ---------------- read side (clk_k) ----------------
  beat_t       head;

  always_ff @(posedge clk_k or negedge rst_k_n) begin
    if (!rst_k_n) begin
      rptr <= '0; rgray_q <= '0; wgray_s1 <= '0; wgray_s2 <= '0;
    end else begin
      {wgray_s2, wgray_s1} <= {wgray_s1, wptr_gray};
      if (m_valid && m_ready) begin
        rptr    <= rptr + 1'b1;
        rgray_q <= bin2gray(rptr + 1'b1);
      end
    end
  end

  assign m_valid = bin2gray(rptr) != wgray_s2;
  assign head    = mem[rptr[AW-1:0]];
  assign m_data  = head.data;
  assign m_keep  = head.keep;
  assign m_last  = head.last;
endmodule

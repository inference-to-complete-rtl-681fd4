// pkt_parser: parser of the traffic monitor. It collects the head of a
// packet (up to HEAD_BEATS beats of 64 bytes; byte 0 of the packet in bits
// [7:0] of the first beat), and for an IPv4 packet carrying TCP or UDP
// extracts the IP tuple for the hash and the IN_BYTES valid raw bytes the
// NNs take: source port (2), destination port (2), protocol (1) and the
// first IN_BYTES-5 payload bytes, zero-padded past the end of the packet
// (the 5 + 59 byte layout is the paper's). IPv4 header length and TCP data
// offset are honoured. Other packets are discarded and counted in
// `skip_cnt`. Ethernet II framing without VLAN tags is assumed.
// Timing: `out_valid` pulses one cycle after the packet's last beat;
// `in_ready` is low in that cycle (one bubble per packet).
module pkt_parser #(
  parameter int HEAD_BEATS = 4,
  parameter int IN_BYTES   = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [511:0]          in_data,
  input  logic [63:0]           in_keep,
  input  logic                  in_valid,
  input  logic                  in_last,
  output logic                  in_ready,
  output logic                  out_valid,
  output logic [31:0]           out_src_ip,
  output logic [31:0]           out_dst_ip,
  output logic [15:0]           out_src_port,
  output logic [15:0]           out_dst_port,
  output logic [7:0]            out_proto,
  output logic [IN_BYTES*8-1:0] out_bytes,
  output logic [31:0]           skip_cnt
);
  localparam int HB = HEAD_BEATS * 64;   // head bytes kept

  logic [7:0]  buf_q [HB];
  logic [7:0]  beat;
  logic [15:0] len_q;                    // bytes received
  logic        have;

  assign in_ready = !have;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= '0; len_q <= '0; have <= 1'b0;
    end else begin
      have <= 1'b0;
      if (in_valid && in_ready) begin
        beat  <= in_last ? 8'd0 : beat + 1'b1;
        len_q <= (beat == 0 ? 16'd0 : len_q) + 16'($countones(in_keep));
        if (in_last) have <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk)
    if (in_valid && in_ready && int'(beat) < HEAD_BEATS)
      for (int i = 0; i < 64; i++) buf_q[int'(beat)*64 + i] <= in_data[8*i +: 8];

  // field extraction from the completed head
  function automatic logic [7:0] hb(input int idx, input logic [15:0] len);
    if (idx < HB && idx < int'(len)) return buf_q[idx];
    return 8'd0;
  endfunction

  logic        ok;
  logic [7:0]  proto;
  int          l4, pay;
  logic [IN_BYTES*8-1:0] bytes_w;
  always_comb begin
    proto = buf_q[23];
    l4    = 14 + 4 * int'(buf_q[14][3:0]);
    pay   = (proto == 8'd6) ? l4 + 4 * int'(buf_q[l4+12][7:4]) : l4 + 8;
    ok    = buf_q[12] == 8'h08 && buf_q[13] == 8'h00 && buf_q[14][7:4] == 4'd4 &&
            buf_q[14][3:0] >= 4'd5 && (proto == 8'd6 || proto == 8'd17) &&
            int'(len_q) >= l4 + 4;
    bytes_w[7:0]   = hb(l4,   len_q);
    bytes_w[15:8]  = hb(l4+1, len_q);
    bytes_w[23:16] = hb(l4+2, len_q);
    bytes_w[31:24] = hb(l4+3, len_q);
    bytes_w[39:32] = proto;
    for (int i = 0; i < IN_BYTES-5; i++) bytes_w[8*(5+i) +: 8] = hb(pay + i, len_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; skip_cnt <= '0;
      out_src_ip <= '0; out_dst_ip <= '0; out_src_port <= '0; out_dst_port <= '0;
      out_proto <= '0; out_bytes <= '0;
    end else begin
      out_valid <= have && ok;
      if (have && !ok) skip_cnt <= skip_cnt + 1'b1;
      if (have) begin
        out_src_ip   <= {buf_q[26], buf_q[27], buf_q[28], buf_q[29]};
        out_dst_ip   <= {buf_q[30], buf_q[31], buf_q[32], buf_q[33]};
        out_src_port <= {buf_q[l4], buf_q[l4+1]};
        out_dst_port <= {buf_q[l4+2], buf_q[l4+3]};
        out_proto    <= proto;
        out_bytes    <= bytes_w;
      end
    end
  end
endmodule

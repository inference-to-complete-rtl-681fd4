// traffic_monitor: front end of the co-processor (paper Sec 3.2, Fig 2).
// A parser extracts the IP tuple and the 64 valid raw bytes, a Toeplitz hash
// identifies the flow, and the flow table records whether the flow has been
// seen and how many packets it has sent. The mux then routes a job (hash +
// raw bytes): the first packet of every flow goes to the fast inference path,
// and the packet whose count first exceeds THRESHOLD (the 17th with the
// paper's threshold of 16) goes to the slow inference path, so an elephant
// flow is analysed a second time by the larger model. All other packets
// only update the table. Flow-table index: the low 16 hash bits.
// Latency: jobs appear 4 cycles after the parser's output (hash 1, table 2,
// mux 1). The counters are statistics for the top level.
//
// Lint note: the parser's protocol output is unused here, because the
// protocol byte already sits in the 64 job bytes and the hash does not use it.
module traffic_monitor #(
  parameter int THRESHOLD  = 16,
  parameter int FT_DEPTH   = 65536,
  parameter int HEAD_BEATS = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          ready,        // flow table initialised
  input  logic [511:0]  in_data,
  input  logic [63:0]   in_keep,
  input  logic          in_valid,
  input  logic          in_last,
  output logic          in_ready,
  output logic          fast_valid,
  output kal_pkg::job_t fast_job,
  output logic          slow_valid,
  output kal_pkg::job_t slow_job,
  output logic [31:0]   pkt_cnt,      // analysed packets
  output logic [31:0]   skip_cnt,     // packets the parser discarded
  output logic [31:0]   fwd_cnt       // flow-table forwarding events
);
  import kal_pkg::*;
  localparam int FAW = $clog2(FT_DEPTH);

  logic                 p_v;
  logic [31:0]          p_sip, p_dip;
  logic [15:0]          p_sp, p_dp;
  logic [7:0]           p_proto;
  logic [IN_BYTES*8-1:0] p_bytes;

  pkt_parser #(.HEAD_BEATS(HEAD_BEATS), .IN_BYTES(IN_BYTES)) u_parser (
    .clk, .rst_n, .in_data, .in_keep, .in_valid, .in_last, .in_ready,
    .out_valid(p_v), .out_src_ip(p_sip), .out_dst_ip(p_dip), .out_src_port(p_sp),
    .out_dst_port(p_dp), .out_proto(p_proto), .out_bytes(p_bytes), .skip_cnt);

  logic        h_v;
  logic [31:0] h;
  toeplitz_hash u_hash (.clk, .rst_n, .in_valid(p_v), .src_ip(p_sip), .dst_ip(p_dip),
                        .src_port(p_sp), .dst_port(p_dp), .out_valid(h_v), .hash(h));

  // raw bytes travel beside the hash and flow-table stages
  logic [IN_BYTES*8-1:0] b1, b2, b3;
  logic [31:0]           h2, h3;
  always_ff @(posedge clk) begin
    b1 <= p_bytes;  b2 <= b1;  b3 <= b2;
    h2 <= h;        h3 <= h2;
  end

  logic       t_v, t_first, t_fwd;
  logic [7:0] t_cnt;
  flow_table #(.DEPTH(FT_DEPTH), .CNT_W(8)) u_ft (
    .clk, .rst_n, .ready, .in_valid(h_v), .in_idx(h[FAW-1:0]),
    .out_valid(t_v), .out_first(t_first), .out_count(t_cnt), .out_fwd(t_fwd));

  // mux
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fast_valid <= 1'b0; slow_valid <= 1'b0; fast_job <= '0; slow_job <= '0;
      pkt_cnt <= '0; fwd_cnt <= '0;
    end else begin
      fast_valid <= t_v && t_first;
      slow_valid <= t_v && !t_first && t_cnt == 8'(THRESHOLD + 1);
      fast_job   <= '{hash: h3, bytes: b3};
      slow_job   <= '{hash: h3, bytes: b3};
      if (t_v) pkt_cnt <= pkt_cnt + 1'b1;
      if (t_v && t_fwd) fwd_cnt <= fwd_cnt + 1'b1;
    end
  end
endmodule

// tb_pkt_parser: builds Ethernet/IPv4 packets in software (TCP and UDP,
// with and without IP and TCP options, short packets whose payload ends
// before byte 59, long multi-beat packets) plus non-IPv4 frames, sends them
// as 64-byte beats and checks the extracted tuple and the 64 raw bytes
// (ports, protocol, payload, zero padding) and the skip counter.
module tb_pkt_parser;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [511:0] in_data;
  logic [63:0]  in_keep;
  logic in_valid, in_last, in_ready, out_valid;
  logic [31:0] sip, dip, skip_cnt;
  logic [15:0] sp, dp;
  logic [7:0]  proto;
  logic [511:0] bytes;
  pkt_parser dut (.clk, .rst_n, .in_data, .in_keep, .in_valid, .in_last, .in_ready, .out_valid,
    .out_src_ip(sip), .out_dst_ip(dip), .out_src_port(sp), .out_dst_port(dp), .out_proto(proto),
    .out_bytes(bytes), .skip_cnt);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  byte unsigned pkt [];
  int nskip = 0;

  task automatic send();
    int nb;
    nb = (pkt.size() + 63) / 64;
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      while (!in_ready) @(negedge clk);
      in_valid = 1; in_last = (b == nb - 1); in_data = '0; in_keep = '0;
      for (int i = 0; i < 64; i++)
        if (b*64 + i < pkt.size()) begin in_data[8*i +: 8] = pkt[b*64 + i]; in_keep[i] = 1; end
    end
    @(negedge clk); in_valid = 0; in_last = 0;
  endtask

  task automatic one(input int ihl, input int proto_i, input int doff, input int paylen, input bit ip);
    int l4, pay, n;
    logic [511:0] e;
    l4 = 14 + 4*ihl;
    pay = (proto_i == 6) ? l4 + 4*doff : l4 + 8;
    n = pay + paylen;
    pkt = new[n];
    foreach (pkt[i]) pkt[i] = 8'($urandom);
    pkt[12] = ip ? 8'h08 : 8'h08; pkt[13] = ip ? 8'h00 : 8'h06;
    pkt[14] = 8'(8'h40 | ihl); pkt[23] = 8'(proto_i);
    if (proto_i == 6) pkt[l4+12] = 8'(doff << 4);
    e[7:0] = pkt[l4]; e[15:8] = pkt[l4+1]; e[23:16] = pkt[l4+2]; e[31:24] = pkt[l4+3];
    e[39:32] = 8'(proto_i);
    for (int i = 0; i < 59; i++) e[8*(5+i) +: 8] = (pay + i < n) ? pkt[pay + i] : 8'd0;
    fork
      send();
      begin
        bit seen;
        seen = 0;
        repeat (12) begin
          @(posedge clk); #1;
          if (out_valid) begin
            seen = 1;
            checks += 4;
            if (sip !== {pkt[26], pkt[27], pkt[28], pkt[29]}) begin failures++; $display("src ip"); end
            if (dip !== {pkt[30], pkt[31], pkt[32], pkt[33]}) begin failures++; $display("dst ip"); end
            if (sp !== {pkt[l4], pkt[l4+1]} || dp !== {pkt[l4+2], pkt[l4+3]}) begin failures++; $display("ports"); end
            if (bytes !== e) begin failures++; $display("raw bytes ihl=%0d proto=%0d doff=%0d len=%0d", ihl, proto_i, doff, paylen); end
          end
        end
        checks++;
        if (seen != ip) begin failures++; $display("out_valid %0d for ip=%0d", seen, ip); end
      end
    join
    if (!ip) nskip++;
  endtask

  initial begin
    in_valid = 0; in_last = 0; in_data = 0; in_keep = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    one(5, 6, 5, 100, 1);
    one(5, 17, 0, 59, 1);
    one(6, 6, 8, 200, 1);
    one(5, 6, 5, 10, 1);      // payload shorter than 59 bytes
    one(5, 17, 0, 0, 1);
    one(5, 6, 5, 50, 0);      // not IPv4
    for (int t = 0; t < 40; t++)
      one($urandom_range(8, 5), $urandom_range(1, 0) ? 6 : 17, $urandom_range(10, 5),
          $urandom_range(120, 0), $urandom_range(7, 0) != 0);
    repeat (3) @(negedge clk);
    checks++;
    if (int'(skip_cnt) != nskip) begin failures++; $display("skip_cnt %0d exp %0d", skip_cnt, nskip); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cache_ram: a 2048-bit-wide instance (the FPE pCache shape) programmed
// through the 32-bit configuration port, read back entry by entry, plus the
// 32-bit-wide case; checks word placement and read hold.
module tb_cache_ram;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic re, cfg_we, re2, cfg_we2;
  logic [1:0] raddr;
  logic [2047:0] rdata;
  logic [7:0] cfg_addr;
  logic [31:0] cfg_data;
  logic [3:0] raddr2, cfg_addr2;
  logic [31:0] rdata2, cfg_data2;
  cache_ram #(.DEPTH(4), .WIDTH(2048)) dut (.clk, .re, .raddr, .rdata, .cfg_we, .cfg_addr, .cfg_data);
  cache_ram #(.DEPTH(16), .WIDTH(32)) dut2 (.clk, .re(re2), .raddr(raddr2), .rdata(rdata2),
                                           .cfg_we(cfg_we2), .cfg_addr(cfg_addr2), .cfg_data(cfg_data2));

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [31:0] pat(input int w);
    return 32'(w) * 32'h9e3779b1 ^ 32'h5a5a0000;
  endfunction

  initial begin
    re = 0; cfg_we = 0; raddr = 0; cfg_addr = 0; cfg_data = 0;
    re2 = 0; cfg_we2 = 0; raddr2 = 0; cfg_addr2 = 0; cfg_data2 = 0;
    for (int w = 0; w < 256; w++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = 8'(w); cfg_data = pat(w);
      cfg_we2 = w < 16; cfg_addr2 = 4'(w); cfg_data2 = ~pat(w);
    end
    @(negedge clk); cfg_we = 0; cfg_we2 = 0;
    for (int e = 0; e < 4; e++) begin
      @(negedge clk); re = 1; raddr = 2'(e);
      @(negedge clk); re = 0; raddr = 2'(e + 1);
      @(negedge clk);
      for (int k = 0; k < 64; k++) begin
        checks++;
        if (rdata[32*k +: 32] !== pat(e*64 + k)) begin
          failures++; $display("entry %0d word %0d got %h", e, k, rdata[32*k +: 32]);
        end
      end
    end
    for (int e = 0; e < 16; e++) begin
      @(negedge clk); re2 = 1; raddr2 = 4'(e);
      @(negedge clk); re2 = 0;
      checks++;
      if (rdata2 !== ~pat(e)) begin failures++; $display("narrow entry %0d", e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

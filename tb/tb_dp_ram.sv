// tb_dp_ram: random simultaneous traffic on both ports of a 1024 x 256
// bank against a software model: reads one cycle later, output hold on idle
// ports, writes from either port.
module tb_dp_ram;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic a_en, a_we, b_en, b_we;
  logic [9:0] a_addr, b_addr;
  logic [255:0] a_wdata, b_wdata, a_rdata, b_rdata;
  logic [255:0] model [1024];
  bit valid [1024];
  dp_ram dut (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata, .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [255:0] rnd256();
    return {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    logic [255:0] ea, eb;
    bit ca, cb;
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_addr = 0; b_addr = 0; a_wdata = 0; b_wdata = 0;
    ca = 0; cb = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (ca) begin checks++; if (a_rdata !== ea) begin failures++; $display("A read %0d", t); end end
      if (cb) begin checks++; if (b_rdata !== eb) begin failures++; $display("B read %0d", t); end end
      a_en = $urandom_range(1, 0); a_we = $urandom_range(1, 0); a_addr = 10'($urandom_range(63, 0));
      b_en = $urandom_range(1, 0); b_we = $urandom_range(1, 0); b_addr = 10'($urandom_range(63, 0) + 64);
      a_wdata = rnd256(); b_wdata = rnd256();
      // port A reads/writes 0..63, port B 64..127, and each reads the other's area sometimes
      if ($urandom_range(3, 0) == 0 && !a_we) a_addr = 10'($urandom_range(127, 64));
      if ($urandom_range(3, 0) == 0 && !b_we) b_addr = 10'($urandom_range(63, 0));
      if (a_en && !a_we) begin ca = valid[a_addr]; ea = model[a_addr]; end
      else if (a_en) ca = 0;
      if (b_en && !b_we) begin cb = valid[b_addr]; eb = model[b_addr]; end
      else if (b_en) cb = 0;
      if (a_en && a_we) begin model[a_addr] = a_wdata; valid[a_addr] = 1; end
      if (b_en && b_we) begin model[b_addr] = b_wdata; valid[b_addr] = 1; end
      if (a_en && !a_we && b_en && b_we && b_addr == a_addr) ca = 0;
      if (b_en && !b_we && a_en && a_we && a_addr == b_addr) cb = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

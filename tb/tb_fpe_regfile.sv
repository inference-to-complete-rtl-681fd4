// tb_fpe_regfile: job load of entries 0..1, byte-masked write-back and
// registered, holding reads, compared with a software copy of the file.
module tb_fpe_regfile;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic re, we, load;
  logic [4:0] raddr, waddr;
  logic [31:0] wmask;
  logic [255:0] rdata, wdata;
  logic [511:0] load_data;
  logic [255:0] model [32];
  fpe_regfile dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wmask, .wdata, .load, .load_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    re = 0; we = 0; load = 0; raddr = 0; waddr = 0; wmask = 0; wdata = 0; load_data = 0;
    // fill every entry with full-mask writes
    for (int e = 0; e < 32; e++) begin
      @(negedge clk); we = 1; waddr = 5'(e); wmask = '1;
      wdata = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      model[e] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      we = 0; load = 0; re = 0;
      case ($urandom_range(3, 0))
        0: begin
          load = 1;
          load_data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
                       $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
          model[0] = load_data[255:0]; model[1] = load_data[511:256];
        end
        1: begin
          we = 1; waddr = 5'($urandom_range(31, 0)); wmask = $urandom;
          wdata = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
          for (int b = 0; b < 32; b++) if (wmask[b]) model[waddr][8*b +: 8] = wdata[8*b +: 8];
        end
        default: begin
          logic [255:0] exp_v;
          re = 1; raddr = 5'($urandom_range(31, 0));
          exp_v = model[raddr];
          @(negedge clk); re = 0; raddr = ~raddr;
          checks++;
          if (rdata !== exp_v) begin failures++; $display("read mismatch"); end
          @(negedge clk);          // output must hold while re is low
          checks++;
          if (rdata !== exp_v) begin failures++; $display("read not held"); end
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

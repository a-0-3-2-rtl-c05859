// tb_guard_mem: writes random flag rows into the image and filter guard
// memories and reads them back on both read ports in the same cycle.
module tb_guard_mem;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic img_re = 0, img_we = 0, flt_re = 0, flt_we = 0;
  logic [9:0] img_raddr = '0, img_waddr = '0, flt_raddr = '0, flt_waddr = '0;
  flags_t img_rflags, flt_rflags, img_wflags = '0, flt_wflags = '0;
  flags_t mi [1024], mf [1024];
  int checks = 0, failures = 0;
  guard_mem dut (.*);
  always #5 clk = ~clk;
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      img_we = 1; img_waddr = 10'(i); img_wflags = 16'($urandom); mi[i] = img_wflags;
      flt_we = 1; flt_waddr = 10'(i); flt_wflags = 16'($urandom); mf[i] = flt_wflags;
    end
    @(negedge clk); img_we = 0; flt_we = 0;
    repeat (500) begin
      int a, b; a = $urandom % 1024; b = $urandom % 1024;
      @(negedge clk); img_re = 1; img_raddr = 10'(a); flt_re = 1; flt_raddr = 10'(b);
      @(negedge clk); img_re = 0; flt_re = 0;
      checks++; if (img_rflags !== mi[a] || flt_rflags !== mf[b]) begin failures++; $display("row %0d/%0d", a, b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

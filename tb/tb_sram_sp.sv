// tb_sram_sp: self-checking test of the single-port SRAM macro.
// Writes random words to 256 random addresses, reads them back (one-cycle
// read latency) and checks that rdata holds while the macro is not enabled.
module tb_sram_sp;
  logic clk = 0, ce = 0, we = 0;
  logic [9:0] addr = '0;
  logic [15:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [15:0] model [1024];
  logic        written [1024];
  sram_sp #(.DEPTH(1024), .WIDTH(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (written[i]) written[i] = 0;
    repeat (256) begin
      @(negedge clk); ce = 1; we = 1; addr = 10'($urandom); wdata = 16'($urandom);
      model[addr] = wdata; written[addr] = 1;
    end
    @(negedge clk); ce = 0; we = 0;
    for (int i = 0; i < 1024; i++) begin
      if (!written[i]) continue;
      @(negedge clk); ce = 1; we = 0; addr = 10'(i);
      @(negedge clk); ce = 0;
      checks++; if (rdata !== model[i]) begin failures++; $display("addr %0d: %h != %h", i, rdata, model[i]); end
      addr = addr + 1;                   // idle: output must hold
      @(negedge clk);
      checks++; if (rdata !== model[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_mac_unit: random sequences of enable/clear against a 48-bit reference
// accumulator; checks single-cycle accumulation and that a guarded (en=0)
// cycle leaves the accumulator unchanged.
module tb_mac_unit;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  logic signed [15:0] a = '0, b = '0;
  logic signed [47:0] acc;
  longint model = 0;
  int checks = 0, failures = 0;
  mac_unit #(.AW_ACC(48)) dut (.*);
  always #5 clk = ~clk;
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (2000) begin
      @(negedge clk);
      en = ($urandom % 4) != 0; clr = ($urandom % 50) == 0;
      a = 16'($urandom); b = 16'($urandom);
      if (en && clr) model = longint'(a) * longint'(b);
      else if (en)   model = model + longint'(a) * longint'(b);
      else if (clr)  model = 0;
      @(posedge clk); #1;
      checks++;
      if (acc !== 48'(model)) begin failures++; $display("acc %0d exp %0d", acc, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

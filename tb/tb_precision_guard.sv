// tb_precision_guard: random vectors and guard flags are loaded; each lane must
// show its word rounded to the programmed precision when its flag is set and
// zero otherwise, one cycle after load, and must hold when load is low.
module tb_precision_guard;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  logic [15:0][15:0] din = '0, dout;
  logic [15:0] flag_in = '0, flag;
  logic [BITS_W-1:0] bits = 5'd16;
  int checks = 0, failures = 0;
  precision_guard #(.LANES(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [15:0][15:0] exp_d; logic [15:0] exp_f;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (300) begin
      @(negedge clk);
      for (int i = 0; i < 16; i++) din[i] = ($urandom % 4 == 0) ? '0 : 16'($urandom);
      for (int i = 0; i < 16; i++) flag_in[i] = din[i] != 0;
      bits = BITS_W'(1 + $urandom % 16);
      load = 1;
      for (int i = 0; i < 16; i++) exp_d[i] = flag_in[i] ? round_word(din[i], bits) : '0;
      exp_f = flag_in;
      @(negedge clk); load = 0; din = '1; flag_in = '1;
      checks++; if (dout !== exp_d || flag !== exp_f) begin failures++; $display("mismatch %h %h", dout, exp_d); end
      @(negedge clk);
      checks++; if (dout !== exp_d) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

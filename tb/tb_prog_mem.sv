// tb_prog_mem: loads a program image through the write port, fetches it back,
// and checks that a fetch colliding with a write is refused.
module tb_prog_mem;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0, fetch_en = 0, fetch_gnt, instr_valid;
  logic [12:0] wr_addr = '0, fetch_addr = '0;
  word_t wr_data = '0, instr;
  word_t model [8192];
  int checks = 0, failures = 0;
  prog_mem dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 8192; i += 7) begin
      @(negedge clk); wr_en = 1; wr_addr = 13'(i); wr_data = 16'($urandom); model[i] = wr_data;
    end
    @(negedge clk); fetch_en = 1; fetch_addr = 0;
    #1 checks++; if (fetch_gnt) failures++;       // collides with the last write
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 8192; i += 7) begin
      fetch_en = 1; fetch_addr = 13'(i);
      @(negedge clk);
      checks++;
      if (!instr_valid || instr !== model[i]) begin failures++; $display("pc %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

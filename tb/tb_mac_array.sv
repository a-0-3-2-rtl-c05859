// tb_mac_array: random weights, pixels and guard flags for 300 cycles; every
// one of the 256 accumulators must equal the sum of w[r]*x[c] over the cycles
// where both flags were set, and n_active must count those MACs each cycle.
module tb_mac_array;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  logic [15:0][15:0] w = '0, x = '0;
  logic [15:0] wflag = '0, xflag = '0;
  logic [15:0][15:0][47:0] acc;
  logic [8:0] n_active;
  longint model [16][16];
  int checks = 0, failures = 0, n_guarded = 0;
  mac_array #(.NR(16), .NC(16), .AW_ACC(48)) dut (.*);
  always #5 clk = ~clk;
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int na;
      @(negedge clk);
      en = ($urandom % 8) != 0; clr = (t == 0) || ($urandom % 100 == 0);
      for (int i = 0; i < 16; i++) begin
        w[i] = 16'($urandom); x[i] = 16'($urandom);
        wflag[i] = ($urandom % 4) != 0; xflag[i] = ($urandom % 3) != 0;
      end
      na = 0;
      for (int r = 0; r < 16; r++)
        for (int c = 0; c < 16; c++) begin
          logic e; e = en && wflag[r] && xflag[c];
          if (e) na++;
          if (e && clr)   model[r][c] = longint'($signed(w[r])) * longint'($signed(x[c]));
          else if (e)     model[r][c] += longint'($signed(w[r])) * longint'($signed(x[c]));
          else if (clr)   model[r][c] = 0;
        end
      #1;
      checks++; if (n_active != 9'(na)) begin failures++; $display("n_active %0d exp %0d", n_active, na); end
      if (na < 256) n_guarded++;
    end
    @(negedge clk); en = 0; clr = 0;
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 16; c++) begin
        checks++;
        if (acc[r][c] !== 48'(model[r][c])) begin failures++; $display("acc[%0d][%0d]", r, c); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_huff_dec: encodes blocks of sparse random words with a reference coder
// in the testbench ('0' for zero, '1' + 16 bits otherwise, zero padded to
// 16-bit chunks), feeds the chunks with random stalls and checks that the
// decoder returns the original words, takes no chunk beyond its own block and
// pulses done once per block.
module tb_huff_dec;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [16:0] nwords = '0;
  word_t in_data = '0, out_data;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, busy, done;
  int checks = 0, failures = 0, dones = 0;
  word_t exp_words [$];
  word_t chunks [$];
  huff_dec dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (exp_words.size() == 0 || out_data !== exp_words[0]) begin
        failures++; $display("word %h exp %h", out_data, exp_words.size() ? exp_words[0] : 16'hxxxx);
      end
      if (exp_words.size()) void'(exp_words.pop_front());
    end
    if (in_valid && in_ready) void'(chunks.pop_front());
    if (done) dones++;
    out_ready <= ($urandom % 4) != 0;
  end
  always @(negedge clk) begin
    in_valid = chunks.size() != 0 && ($urandom % 3 != 0);
    in_data  = chunks.size() ? chunks[0] : '0;
  end

  initial begin
    bit bits [$];
    repeat (2) @(negedge clk); rst_n = 1;
    for (int blk = 0; blk < 6; blk++) begin
      int n; n = 1 + $urandom % 200;
      bits.delete();
      for (int i = 0; i < n; i++) begin
        word_t w; w = ($urandom % 100 < 18 * blk) ? '0 : 16'($urandom | 16'h0100);
        exp_words.push_back(w);
        if (w == 0) bits.push_back(1'b0);
        else begin bits.push_back(1'b1); for (int b = 15; b >= 0; b--) bits.push_back(w[b]); end
      end
      while (bits.size() % 16 != 0) bits.push_back(1'b0);
      @(negedge clk); start = 1; nwords = 17'(n);
      @(negedge clk); start = 0;
      for (int c = 0; c < bits.size(); c += 16) begin
        word_t ch; for (int b = 0; b < 16; b++) ch[15 - b] = bits[c + b];
        chunks.push_back(ch);
      end
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      checks++; if (exp_words.size() != 0 || chunks.size() != 0) begin
        failures++; $display("block %0d: %0d words, %0d chunks left", blk, exp_words.size(), chunks.size());
      end
      exp_words.delete(); chunks.delete();
    end
    checks++; if (dones != 6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_huff_enc: sends blocks of sparse random words (random valid/ready
// stalls) and compares the packed output chunks with a reference bit stream
// built word by word: '0' for a zero word, '1' + 16 bits otherwise, padded
// with zeros to whole 16-bit chunks, last chunk flagged.
module tb_huff_enc;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  word_t in_data = '0, out_data;
  logic in_valid = 0, in_last = 0, in_ready, out_valid, out_last, out_ready = 0;
  int checks = 0, failures = 0;
  bit    refbits [$];
  word_t exp_chunks [$];
  huff_enc dut (.*);
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // receiver with random back-pressure: collects the chunks of a block
  word_t rx [$];
  logic  rx_last [$];
  int lasts = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      rx.push_back(out_data); rx_last.push_back(out_last);
      if (out_last) lasts++;
    end
    out_ready <= ($urandom % 4) != 0;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int blk = 0; blk < 6; blk++) begin
      int n; n = 16 + $urandom % 200;
      refbits.delete();
      for (int i = 0; i < n; i++) begin
        word_t w; w = ($urandom % 100 < 20 * blk) ? '0 : 16'($urandom | 1);
        if (w == 0) refbits.push_back(1'b0);
        else begin refbits.push_back(1'b1); for (int b = 15; b >= 0; b--) refbits.push_back(w[b]); end
        @(negedge clk);
        in_data = w; in_valid = 1; in_last = (i == n - 1);
        while (!in_ready) @(negedge clk);
        @(posedge clk);
        #1 in_valid = 0;
        if (i == n - 1) begin
          while (refbits.size() % 16 != 0) refbits.push_back(1'b0);
          for (int c = 0; c < refbits.size(); c += 16) begin
            word_t ch; for (int b = 0; b < 16; b++) ch[15 - b] = refbits[c + b];
            exp_chunks.push_back(ch);
          end
        end
        if ($urandom % 3 == 0) @(negedge clk);
      end
      in_last = 0;
      repeat (40) @(negedge clk);
      checks++;
      if (rx.size() != exp_chunks.size()) begin
        failures++; $display("block %0d: %0d chunks, expected %0d", blk, rx.size(), exp_chunks.size());
      end else
        for (int c = 0; c < rx.size(); c++) begin
          checks++;
          if (rx[c] !== exp_chunks[c] || rx_last[c] !== (c == rx.size() - 1)) begin
            failures++; $display("chunk %0d: %h exp %h", c, rx[c], exp_chunks[c]);
          end
        end
      rx.delete(); rx_last.delete(); exp_chunks.delete();
    end
    checks++; if (lasts != 6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

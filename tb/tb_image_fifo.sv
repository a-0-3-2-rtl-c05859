// tb_image_fifo: parallel loads followed by single-pixel shifts, compared with
// a reference shift register; column c must see pixel start+k+c after k
// shifts, zero where the pixel's guard flag is clear, rounded to `bits`.
module tb_image_fifo;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, shift = 0, pix_flag = 0;
  logic [15:0][15:0] vec_in = '0, q;
  logic [15:0] vec_flag = '0, qflag;
  word_t pix_in = '0;
  logic [BITS_W-1:0] bits = 5'd16;
  int checks = 0, failures = 0;
  word_t img [64];
  image_fifo #(.LANES(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (20) begin
      foreach (img[i]) img[i] = ($urandom % 3 == 0) ? '0 : 16'($urandom);
      bits = BITS_W'(4 + $urandom % 13);
      @(negedge clk);
      for (int i = 0; i < 16; i++) begin vec_in[i] = img[i]; vec_flag[i] = img[i] != 0; end
      load = 1;
      for (int k = 0; k <= 11; k++) begin
        @(negedge clk);
        load = 0;
        for (int c = 0; c < 16; c++) begin
          word_t e; e = img[k + c] != 0 ? round_word(img[k + c], bits) : '0;
          checks++;
          if (q[c] !== e || qflag[c] !== (img[k + c] != 0)) begin
            failures++; $display("k=%0d c=%0d got %h exp %h", k, c, q[c], e);
          end
        end
        shift = 1; pix_in = img[k + 16]; pix_flag = img[k + 16] != 0;
      end
      shift = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

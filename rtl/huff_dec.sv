// huff_dec: two-symbol Huffman decompressor for the IO stream.
//
// Reverses huff_enc: reads packed 16-bit chunks (MSB first) and emits one
// 16-bit word per decoded symbol: bit 0 gives a zero word, bit 1 is followed
// by the 16 bits of a nonzero word.  A transfer starts with `start` and the
// number of words to decode; once that many words are out, the padding left
// in the buffer is dropped and `done` pulses.  A chunk is taken only when the
// buffered bits do not hold a complete symbol, so the decoder never reads
// past the end of its own transfer.  Interfaces: valid/ready on both sides.
// The code is the chip's; framing, bit order and handshake are this
// implementation's choices.
module huff_dec
  import cnn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [16:0] nwords,
  input  word_t       in_data,
  input  logic        in_valid,
  output logic        in_ready,
  output word_t       out_data,
  output logic        out_valid,
  input  logic        out_ready,
  output logic        busy,
  output logic        done
);
  logic [63:0] bbuf;
  logic [6:0]  cnt;
  logic [16:0] remaining;
  logic        have_sym;

  assign busy      = remaining != '0;
  assign have_sym  = cnt != '0 && (!bbuf[63] || cnt >= 7'd17);
  assign out_valid = busy && have_sym;
  assign out_data  = bbuf[63] ? bbuf[62:47] : '0;
  assign in_ready  = busy && !have_sym;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bbuf      <= '0;
      cnt       <= '0;
      remaining <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        bbuf      <= '0;
        cnt       <= '0;
        remaining <= nwords;
      end else if (out_valid && out_ready) begin
        if (remaining == 17'd1) begin
          bbuf <= '0;                        // drop the padding
          cnt  <= '0;
          done <= 1'b1;
        end else if (bbuf[63]) begin
          bbuf <= bbuf << 17;
          cnt  <= cnt - 7'd17;
        end else begin
          bbuf <= bbuf << 1;
          cnt  <= cnt - 7'd1;
        end
        remaining <= remaining - 17'd1;
      end else if (in_valid && in_ready) begin
        bbuf <= bbuf | ({in_data, 48'b0} >> cnt);
        cnt  <= cnt + 7'd16;
      end
    end
  end
endmodule

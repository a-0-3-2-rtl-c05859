// huff_enc: two-symbol Huffman compressor for the IO stream.
//
// Each 16-bit word is coded as the single bit 0 when it is zero, and as the
// bit 1 followed by the 16 bits of the word when it is not.  With the large
// share of zero words in ReLU outputs and low-precision data this shrinks the
// off-chip traffic.  The code bits are packed MSB first into 16-bit output
// chunks.  After the word marked in_last the final chunk is padded with zeros
// and marked out_last.  Interfaces: valid/ready on both sides, one word in and
// one chunk out per cycle at most.  A 64-bit left-aligned bit buffer holds the
// bits not yet sent.  The code is the chip's; the packing, bit order and
// handshake are this implementation's choices.
module huff_enc
  import cnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  word_t in_data,
  input  logic  in_valid,
  input  logic  in_last,
  output logic  in_ready,
  output word_t out_data,
  output logic  out_valid,
  output logic  out_last,
  input  logic  out_ready
);
  logic [63:0] bbuf;
  logic [6:0]  cnt;      // valid bits in bbuf
  logic        flushing; // last word taken, draining

  assign in_ready  = !flushing && cnt <= 7'd47;
  assign out_valid = cnt >= 7'd16 || (flushing && cnt != '0);
  assign out_data  = bbuf[63:48];
  assign out_last  = flushing && cnt <= 7'd16;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bbuf     <= '0;
      cnt      <= '0;
      flushing <= 1'b0;
    end else begin
      logic [63:0] b;
      logic [6:0]  c;
      b = bbuf;
      c = cnt;
      if (out_valid && out_ready) begin
        b = b << 16;
        c = (c >= 7'd16) ? c - 7'd16 : '0;
        if (out_last) flushing <= 1'b0;
      end
      if (in_valid && in_ready) begin
        if (in_data == '0) begin
          c = c + 7'd1;                      // '0' bit: buffer already holds zeros
        end else begin
          b = b | ({1'b1, in_data, 47'b0} >> c);
          c = c + 7'd17;
        end
        if (in_last) flushing <= 1'b1;
      end
      bbuf <= b;
      cnt  <= c;
    end
  end
endmodule

// round_unit: rounds one 16-bit fixed-point word to a programmable precision.
//
// For a precision of b bits (1..16) the word keeps its MSB alignment: half an
// LSB of the b-bit grid, 1 << (16-b-1), is added and the 16-b low bits are
// cleared, so the multiplier behind it sees constant zeros in those bits and
// its switching activity drops with precision.  A positive overflow of the
// rounding add saturates to the largest b-bit value.  Combinational, no state.
// The add-half-LSB structure follows the chip's Round unit; saturation and the
// MSB-aligned format are this implementation's choices.
module round_unit
  import cnn_pkg::*;
(
  input  word_t             din,
  input  logic [BITS_W-1:0] bits,   // 1..16; 0 or >=16 passes din unchanged
  output word_t             dout
);
  always_comb dout = round_word(din, bits);
endmodule

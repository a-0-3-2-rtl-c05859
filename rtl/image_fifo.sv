// image_fifo: the image-side shift register ("FIFO") feeding the 2-D array.
//
// In the first cycle of a kernel row, 16 consecutive pixels of one image row
// are loaded in parallel (load).  In each following cycle a single pixel is
// shifted in (shift): entries move one place towards entry 0 and the new pixel
// enters at entry N-1, so column c sees pixel (start + k + c) at kernel tap k.
// Each entry carries the pixel's guard flag; an entry whose flag is clear
// drives zero to its column.  The output is rounded to the image precision.
// Timing: new contents appear one clock after load/shift; load wins over
// shift.  Registers reset to zero.  The parallel-load / single-pixel-shift
// scheme is the chip's; the shift direction is this implementation's choice.
module image_fifo
  import cnn_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    load,
  input  logic                    shift,
  input  logic [LANES-1:0][W-1:0] vec_in,
  input  logic [LANES-1:0]        vec_flag,
  input  word_t                   pix_in,
  input  logic                    pix_flag,
  input  logic [BITS_W-1:0]       bits,
  output logic [LANES-1:0][W-1:0] q,
  output logic [LANES-1:0]        qflag
);
  logic [LANES-1:0][W-1:0] r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r     <= '0;
      qflag <= '0;
    end else if (load) begin
      r     <= vec_in;
      qflag <= vec_flag;
    end else if (shift) begin
      for (int i = 0; i < LANES - 1; i++) begin
        r[i]     <= r[i+1];
        qflag[i] <= qflag[i+1];
      end
      r[LANES-1]     <= pix_in;
      qflag[LANES-1] <= pix_flag;
    end
  end

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    word_t rounded;
    round_unit u_round (.din(r[i]), .bits(bits), .dout(rounded));
    assign q[i] = qflag[i] ? rounded : '0;
  end
endmodule

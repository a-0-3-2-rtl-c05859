// precision_guard: the filter-side "precision & guard" stage of the 2-D array.
//
// Each of the N lanes holds one operand register and its guard flag
// (flag = 1: the word is nonzero).  On load, every lane captures its flag, and
// the lane's data register is written only when the flag is set: a zero
// operand leaves the register (and the multiplier row behind it) quiet.  The
// output of a lane is its register rounded to the layer precision when its
// flag is set and zero otherwise (the guard multiplexer).  Timing: operands
// appear on dout one clock after load.  Registers reset to zero.
module precision_guard
  import cnn_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        load,
  input  logic [LANES-1:0][W-1:0]     din,
  input  logic [LANES-1:0]            flag_in,
  input  logic [BITS_W-1:0]           bits,
  output logic [LANES-1:0][W-1:0]     dout,
  output logic [LANES-1:0]            flag
);
  logic [LANES-1:0][W-1:0] r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r    <= '0;
      flag <= '0;
    end else if (load) begin
      flag <= flag_in;
      for (int i = 0; i < LANES; i++)
        if (flag_in[i]) r[i] <= din[i];
    end
  end

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    word_t rounded;
    round_unit u_round (.din(r[i]), .bits(bits), .dout(rounded));
    assign dout[i] = flag[i] ? rounded : '0;
  end
endmodule

// mac_unit: one processing element of the 2-D array.
//
// A single-cycle signed 16x16 multiply-accumulate into a 48-bit register,
// wide enough that no realistic kernel overflows it.  When en is low (one of
// the operands is zero, or no MAC is issued) the accumulator is not clocked:
// the operation is guarded.  clr together with en starts a new accumulation
// with the current product; clr alone clears the register.  Timing: acc shows
// the result one clock after en.  Reset clears the accumulator.
module mac_unit
  import cnn_pkg::*;
#(
  parameter int unsigned AW_ACC = 48
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     clr,
  input  logic signed [W-1:0]      a,
  input  logic signed [W-1:0]      b,
  output logic signed [AW_ACC-1:0] acc
);
  logic signed [2*W-1:0] prod;
  always_comb prod = a * b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          acc <= '0;
    else if (en && clr)  acc <= AW_ACC'(prod);
    else if (en)         acc <= acc + AW_ACC'(prod);
    else if (clr)        acc <= '0;
  end
endmodule

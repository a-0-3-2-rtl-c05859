// mac_array: the 16x16 2-D SIMD MAC array.
//
// Row r receives one filter weight w[r] (16 different filters), column c one
// image pixel x[c] (16 neighbouring output positions); MAC (r,c) accumulates
// w[r]*x[c], so 256 products are made from 16+16 inputs each cycle and the
// partial sums stay in the local 48-bit accumulators.  A MAC is enabled only
// when the array is enabled and both its row and its column guard flags are
// set: MACs with a zero input are not clocked.  n_active reports how many
// MACs worked this cycle.  Timing: accumulators update one clock after en.
module mac_array
  import cnn_pkg::*;
#(
  parameter int unsigned NR     = 16,
  parameter int unsigned NC     = 16,
  parameter int unsigned AW_ACC = 48
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              en,
  input  logic                              clr,
  input  logic [NR-1:0][W-1:0]              w,
  input  logic [NR-1:0]                     wflag,
  input  logic [NC-1:0][W-1:0]              x,
  input  logic [NC-1:0]                     xflag,
  output logic [NR-1:0][NC-1:0][AW_ACC-1:0] acc,
  output logic [$clog2(NR*NC+1)-1:0]        n_active
);
  for (genvar r = 0; r < NR; r++) begin : g_row
    for (genvar c = 0; c < NC; c++) begin : g_col
      mac_unit #(.AW_ACC(AW_ACC)) u_mac (
        .clk, .rst_n,
        .en  (en && wflag[r] && xflag[c]),
        .clr (clr),
        .a   (w[r]),
        .b   (x[c]),
        .acc (acc[r][c])
      );
    end
  end

  always_comb begin
    n_active = '0;
    if (en)
      n_active = ($clog2(NR*NC+1))'($countones(wflag)) * ($clog2(NR*NC+1))'($countones(xflag));
  end
endmodule

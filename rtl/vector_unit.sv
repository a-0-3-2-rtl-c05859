// vector_unit: the 16-lane 1-D SIMD unit (max-pool, ReLU and misc. arithmetic).
//
// Sixteen processing units sit between an input register and an output
// register.  The input register captures either one row of 16 MAC-array
// accumulators, requantised to 16 bits (arithmetic right shift by `shift`,
// then saturation), or one 16-word vector from the data memory.  One cycle
// later each lane applies `op` (see cnn_pkg::vop_t) to its input and its own
// output register: LOAD, ReLU, running MAX for max-pooling, saturating ADD,
// MIN.  out_flags marks the nonzero output words: they are the guard flags of
// the next layer.  Timing: en at cycle t samples the source at t, the result
// is in `out` after the clock edge ending cycle t+1.  Registers reset to zero.
// The unit's role and its ReLU/max-pool operations follow the chip; the
// requantisation, the operation set and its encoding are this
// implementation's choices.
module vector_unit
  import cnn_pkg::*;
#(
  parameter int unsigned LANES  = 16,
  parameter int unsigned AW_ACC = 48
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         en,
  input  vop_t                         op,
  input  vsrc_t                        src,
  input  logic [5:0]                   shift,
  input  logic [LANES-1:0][AW_ACC-1:0] acc_row,
  input  logic [LANES-1:0][W-1:0]      mem_vec,
  output logic [LANES-1:0][W-1:0]      out,
  output logic [LANES-1:0]             out_flags
);
  logic [LANES-1:0][W-1:0] in_r;
  vop_t                    op_r;
  logic                    v_r;

  function automatic word_t requant(logic signed [AW_ACC-1:0] a, logic [5:0] sh);
    logic signed [AW_ACC-1:0] s;
    s = a >>> sh;
    if (s > AW_ACC'(signed'(32767)))  return 16'sh7FFF;
    if (s < -AW_ACC'(signed'(32768))) return 16'sh8000;
    return s[W-1:0];
  endfunction

  function automatic word_t sat_add(word_t a, word_t b);
    logic signed [W:0] s;
    s = {a[W-1], a} + {b[W-1], b};
    if (s[W] != s[W-1]) return s[W] ? 16'h8000 : 16'h7FFF;
    return s[W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_r <= '0;
      op_r <= VOP_NOP;
      v_r  <= 1'b0;
    end else begin
      v_r <= en;
      if (en) begin
        op_r <= op;
        for (int i = 0; i < LANES; i++)
          in_r[i] <= (src == VSRC_ACC) ? requant(acc_row[i], shift) : mem_vec[i];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out <= '0;
    else if (v_r) begin
      for (int i = 0; i < LANES; i++) begin
        unique case (op_r)
          VOP_LOAD: out[i] <= in_r[i];
          VOP_RELU: out[i] <= $signed(in_r[i]) > 0 ? in_r[i] : '0;
          VOP_MAX:  out[i] <= $signed(in_r[i]) > $signed(out[i]) ? in_r[i] : out[i];
          VOP_MIN:  out[i] <= $signed(in_r[i]) < $signed(out[i]) ? in_r[i] : out[i];
          VOP_ADD:  out[i] <= sat_add(out[i], in_r[i]);
          default:  out[i] <= out[i];
        endcase
      end
    end
  end

  always_comb
    for (int i = 0; i < LANES; i++) out_flags[i] = (out[i] != '0);
endmodule

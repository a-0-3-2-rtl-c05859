// tb_vector_unit: drives random accumulator rows and memory vectors through
// every operation (requantising load, ReLU, max-pool, add, min) and compares
// the output register and its guard flags with a reference model, checking
// the two-cycle latency.
module tb_vector_unit;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  vop_t op = VOP_NOP; vsrc_t src = VSRC_ACC;
  logic [5:0] shift = '0;
  logic [15:0][47:0] acc_row = '0;
  logic [15:0][15:0] mem_vec = '0, out;
  logic [15:0] out_flags;
  int checks = 0, failures = 0;
  int model [16];
  int opcount [8];
  vector_unit dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  initial begin
    foreach (model[i]) model[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (600) begin
      int inv [16];
      @(negedge clk);
      en = 1;
      op = vop_t'($urandom % 6);
      src = vsrc_t'($urandom % 2);
      shift = 6'($urandom % 24);
      for (int i = 0; i < 16; i++) begin
        acc_row[i] = {{16{1'b0}}, 32'($urandom)} - 48'(64'h80000000);
        acc_row[i] = $signed(acc_row[i]) >>> ($urandom % 8);
        mem_vec[i] = 16'($urandom);
        if (src == VSRC_ACC) inv[i] = sat($signed(acc_row[i]) >>> shift);
        else                 inv[i] = int'($signed(mem_vec[i]));
        case (op)
          VOP_LOAD: model[i] = inv[i];
          VOP_RELU: model[i] = inv[i] > 0 ? inv[i] : 0;
          VOP_MAX:  model[i] = inv[i] > model[i] ? inv[i] : model[i];
          VOP_MIN:  model[i] = inv[i] < model[i] ? inv[i] : model[i];
          VOP_ADD:  model[i] = sat(longint'(model[i]) + inv[i]);
          default: ;
        endcase
      end
      opcount[op]++;
      @(negedge clk); en = 0;
      @(negedge clk);
      for (int i = 0; i < 16; i++) begin
        checks++;
        if ($signed(out[i]) != model[i] || out_flags[i] != (model[i] != 0)) begin
          failures++; $display("op %s lane %0d got %0d exp %0d", op.name(), i, $signed(out[i]), model[i]);
        end
      end
    end
    for (int o = 1; o < 6; o++) begin checks++; if (opcount[o] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

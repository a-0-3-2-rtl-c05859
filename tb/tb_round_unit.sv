// tb_round_unit: checks precision rounding against an integer reference:
// for b bits, r = floor((x + 2^(15-b)) / 2^(16-b)) * 2^(16-b), saturated to
// the largest b-bit value; all 16 precisions, edge values and random words.
module tb_round_unit;
  import cnn_pkg::*;
  word_t din, dout;
  logic [BITS_W-1:0] bits;
  int checks = 0, failures = 0;
  round_unit dut (.*);
  function automatic int ref_round(int x, int b);
    int s, t, q, mx;
    if (b >= 16) return x;
    s  = 16 - b;
    t  = x + (1 << (s - 1));
    q  = (t >= 0) ? (t / (1 << s)) : -((-t + (1 << s) - 1) / (1 << s));
    mx = (32767 / (1 << s));
    if (q > mx) q = mx;
    return q * (1 << s);
  endfunction
  task automatic one(int x, int b);
    int e;
    din = word_t'(x); bits = BITS_W'(b); #1;
    e = ref_round(x, b);
    checks++;
    if ($signed(dout) != e) begin
      failures++; $display("x=%0d b=%0d got %0d exp %0d", x, b, $signed(dout), e);
    end
  endtask
  initial begin
    for (int b = 1; b <= 16; b++) begin
      one(0, b); one(32767, b); one(-32768, b); one(1, b); one(-1, b); one(255, b); one(-256, b);
      repeat (200) one(int'($signed(16'($urandom))), b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_workloads: runs one output-row tile of the layers the chip was measured
// on, with each layer's kernel size, filter and image precision and share of
// zero words:
//   LeNet-5 l1   5x5,  1 channel,  6 filters, 3-bit filters / 1-bit image, 35% / 87% zeros
//   LeNet-5 l2   5x5,  6 channels, 16 filters, 4 / 6 bit,  26% / 55% zeros
//   AlexNet l1  11x11, 3 channels, 16 filters, 7 / 4 bit,  21% / 29% zeros (stride 1)
//   AlexNet l2   5x5,  4 channels (of 48), 16 filters, 7 / 7 bit, 19% / 89% zeros
// For each layer the testbench (acting as controller) loads the data through
// the Huffman-coded stream with guard flags, runs K*K*C MAC cycles per output
// row (one vector fetch and K-1 pixel shifts per kernel row and channel),
// then reads every accumulator row through ReLU and compares it with a
// reference convolution.  It also checks the MAC-cycle count, the number of
// MACs that actually worked against the count of nonzero operand pairs, and
// the IO compression against 16 / (z + 17 (1 - z)) for the measured zero
// share z.  Data words are generated already at the layer's precision.
module tb_workloads;
  import cnn_pkg::*;
  localparam int IW = 32, IMG = 0, FLT = 16384, SH = 24;

  logic clk = 0, rst_n = 0;
  ctrl_t ctrl = '0;
  word_t io_in_data, io_out_data, instr;
  logic io_in_valid, io_in_ready, io_out_valid, io_out_last, io_out_ready = 1;
  logic dma_busy, dma_done, fetch_en = 0, fetch_gnt, instr_valid;
  logic [12:0] fetch_addr = '0;
  vec_t vu_out; flags_t vu_flags; logic [8:0] mac_active;

  cnn_processor dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    #20000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  word_t inq [$];
  always @(negedge clk) begin
    io_in_valid = inq.size() != 0;
    io_in_data  = inq.size() ? inq[0] : '0;
  end
  int n_mac_cycles = 0, n_active_sum = 0;
  always @(posedge clk) if (rst_n) begin
    if (io_in_valid && io_in_ready) void'(inq.pop_front());
    if (dut.p3.mac_en) begin n_mac_cycles++; n_active_sum += mac_active; end
  end

  function automatic void encode(word_t w[$], ref word_t ch[$]);
    bit b[$];
    foreach (w[i]) if (w[i] == 0) b.push_back(0); else begin b.push_back(1); for (int k = 15; k >= 0; k--) b.push_back(w[i][k]); end
    while (b.size() % 16) b.push_back(0);
    for (int c = 0; c < b.size(); c += 16) begin word_t x; for (int k = 0; k < 16; k++) x[15-k] = b[c+k]; ch.push_back(x); end
  endfunction
  // random b-bit word (MSB-aligned), zero with probability pz percent
  function automatic word_t rword(int b, int pz);
    int v;
    if (int'($urandom % 100) < pz) return '0;
    if (b == 1) return 16'h8000;          // 1-bit two's complement: -1 or 0
    do v = int'($urandom % (1 << b)) - (1 << (b - 1)); while (v == 0);
    return word_t'(v <<< (16 - b));
  endfunction
  task automatic step(ctrl_t c);
    @(negedge clk); ctrl = c;
  endtask
  task automatic dma_load(addr_t a, logic flt, word_t data[$], output real ratio);
    ctrl_t w; word_t code[$];
    encode(data, code);
    ratio = real'(data.size()) / real'(code.size());
    inq = code;
    w = '0; w.dma_start = 1; w.dma_cmd.tgt = DT_DATA; w.dma_cmd.huff = 1; w.dma_cmd.gen_flags = 1;
    w.dma_cmd.flag_flt = flt; w.dma_cmd.addr = a; w.dma_cmd.nwords = 17'(data.size());
    step(w); step('0);
    while (dma_busy) @(negedge clk);
  endtask

  task automatic run_layer(string name, int K, int C, int NF, int fb, int ib, int pzf, int pzi);
    int IH; word_t img [][][]; word_t wgt [][][][];   // img[c][y][x], wgt[c][ky][kx][f]
    word_t data [$]; real r_img, r_flt; int zi, zf, ni, nf; int cyc0, act0, exp_active;
    longint acc [16][16]; ctrl_t w; real z;
    IH = K;
    img = new[C]; foreach (img[c]) begin img[c] = new[IH]; foreach (img[c][y]) img[c][y] = new[IW]; end
    wgt = new[C];
    foreach (wgt[c]) begin wgt[c] = new[K]; foreach (wgt[c][y]) begin wgt[c][y] = new[K]; foreach (wgt[c][y][x]) wgt[c][y][x] = new[16]; end end
    zi = 0; ni = 0; zf = 0; nf = 0;
    data.delete();
    for (int c = 0; c < C; c++) for (int y = 0; y < IH; y++) for (int x = 0; x < IW; x++) begin
      img[c][y][x] = rword(ib, pzi); data.push_back(img[c][y][x]);
      ni++; if (img[c][y][x] == 0) zi++;
    end
    dma_load(IMG, 1'b0, data, r_img);
    data.delete();
    for (int c = 0; c < C; c++) for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++)
      for (int f = 0; f < 16; f++) begin
        wgt[c][ky][kx][f] = f < NF ? rword(fb, pzf) : '0; data.push_back(wgt[c][ky][kx][f]);
        nf++; if (wgt[c][ky][kx][f] == 0) zf++;
      end
    dma_load(FLT, 1'b1, data, r_flt);
    // reference
    exp_active = 0;
    for (int f = 0; f < 16; f++) for (int x = 0; x < 16; x++) begin
      acc[f][x] = 0;
      for (int c = 0; c < C; c++) for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++)
        acc[f][x] += longint'($signed(wgt[c][ky][kx][f])) * longint'($signed(img[c][ky][x + kx]));
    end
    for (int c = 0; c < C; c++) for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++) begin
      int a, b; a = 0; b = 0;
      for (int f = 0; f < 16; f++) if (wgt[c][ky][kx][f] != 0) a++;
      for (int x = 0; x < 16; x++) if (img[c][ky][x + kx] != 0) b++;
      exp_active += a * b;
    end
    // MAC sequence: output row 0
    cyc0 = n_mac_cycles; act0 = n_active_sum;
    for (int c = 0; c < C; c++) for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++) begin
      w = '0;
      w.img_rd = 1; w.img_vec = (kx == 0);
      w.img_addr = addr_t'(IMG + (c * IH + ky) * IW + (kx == 0 ? 0 : 15 + kx));
      w.flt_rd = 1; w.flt_addr = addr_t'(FLT + ((c * K + ky) * K + kx) * 16);
      w.mac_en = 1; w.mac_clr = (c == 0 && ky == 0 && kx == 0);
      w.img_bits = 5'(ib); w.flt_bits = 5'(fb);
      step(w);
    end
    repeat (5) step('0);
    chk(n_mac_cycles - cyc0 == K * K * C, $sformatf("%s: %0d MAC cycles, expected %0d", name, n_mac_cycles - cyc0, K * K * C));
    chk(n_active_sum - act0 == exp_active, $sformatf("%s: %0d active MACs, expected %0d", name, n_active_sum - act0, exp_active));
    // readout through ReLU
    for (int f = 0; f < 16; f++) begin
      w = '0; w.vu_en = 1; w.vu_op = VOP_RELU; w.vu_src = VSRC_ACC; w.vu_row = 4'(f); w.vu_shift = 6'(SH);
      step(w); repeat (4) step('0);
      for (int x = 0; x < 16; x++) begin
        longint s; int e;
        s = acc[f][x] >>> SH;
        e = s > 32767 ? 32767 : (s < -32768 ? -32768 : int'(s));
        if (e < 0) e = 0;
        chk($signed(vu_out[x]) == e, $sformatf("%s: filter %0d position %0d: %0d, expected %0d", name, f, x, $signed(vu_out[x]), e));
      end
    end
    z = real'(zi) / real'(ni);
    chk(r_img > 0.97 * 16.0 / (z + 17.0 * (1.0 - z)) - 0.05, $sformatf("%s: image compression %.2f", name, r_img));
    $display("%s: K=%0d C=%0d filters=%0d bits %0d/%0d, zeros filter %0d%% image %0d%%, MAC cycles %0d, MACs worked %0d of %0d (%0.1f%%), IO compression image %.2fx filter %.2fx",
             name, K, C, NF, fb, ib, 100 * zf / nf, 100 * zi / ni, K * K * C, exp_active, K * K * C * 256,
             100.0 * exp_active / (K * K * C * 256), r_img, r_flt);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run_layer("LeNet-5 l1",  5, 1,  6, 3, 1, 35, 87);
    run_layer("LeNet-5 l2",  5, 6, 16, 4, 6, 26, 55);
    run_layer("AlexNet l1", 11, 3, 16, 7, 4, 21, 29);
    run_layer("AlexNet l2",  5, 4, 16, 7, 7, 19, 89);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

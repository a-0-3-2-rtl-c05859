// tb_cnn_processor: end-to-end test of the processor at its default size.
//
// The testbench plays the controller.  It
//  1. loads a 4 x 32 image (about half zeros) into data block 0 and the
//     3x3 weights of 16 filters into block 1 through the Huffman-coded IO
//     stream, letting the DMA write the guard flags of both;
//  2. loads a few program words and fetches them back;
//  3. computes output row 0 of a 3x3 convolution (16 filters x 16 positions)
//     at 16-bit precision: per kernel row one vector image load and two
//     single-pixel shifts, 9 MAC cycles; meanwhile an unrelated DMA load into
//     block 0 must wait for the image port (DMA stall);
//  4. requantises and applies ReLU in the 1-D SIMD unit and writes the row to
//     block 3;
//  5. computes output row 1 at 7-bit image and filter precision (mode
//     switch), then max-pools it with row 0 (load row 0 from memory, running
//     max with the accumulators) and writes the pooled result, with its guard
//     flags, to block 2, rounded to 6 bits (the next layer's precision):
//     words that round to zero get a zero guard flag;
//  6. reads the pooled result out through the Huffman coder and compares the
//     chunks with a reference coding of the reference result.
// The reference convolution, rounding, requantisation and coding are written
// here independently of the RTL.  Each mechanism (guarded MAC, guarded pixel
// fetch, guarded filter lane, DMA stall, precision switch, Huffman in/out,
// max-pool, ReLU, flag write-back, program fetch) is counted; one that never
// happens counts as a failure.  The 9-cycle MAC latency per output row is
// checked as well.
module tb_cnn_processor;
  import cnn_pkg::*;
  localparam int K = 3, IW = 32, IH = 4, SH = 12, WB_BITS = 6;
  localparam int IMG = 0, FLT = 16384, POOL = 32768 + 512 * 16, R0 = 49152 + 512 * 16;

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
    #1000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // ---------------- IO stream ----------------
  word_t inq [$]; word_t outq [$]; logic outlast [$];
  always @(negedge clk) begin
    io_in_valid = inq.size() != 0;
    io_in_data  = inq.size() ? inq[0] : '0;
  end
  // ---------------- mechanism counters ----------------
  int n_mac_cycles = 0, n_guarded_mac = 0, n_active_sum = 0, n_pix_skip = 0, n_lane_skip = 0;
  int n_dma_stall = 0, n_mode_switch = 0, n_huff_in = 0, n_huff_out = 0, n_relu = 0, n_max = 0;
  int n_flag_wb = 0, n_fetch = 0, n_round_zero = 0;
  logic [4:0] last_bits = 5'd16;
  always @(posedge clk) if (rst_n) begin
    if (io_in_valid && io_in_ready) void'(inq.pop_front());
    if (io_out_valid && io_out_ready) begin outq.push_back(io_out_data); outlast.push_back(io_out_last); end
    if (dut.p3.mac_en) begin
      n_mac_cycles++; n_active_sum += mac_active;
      if (mac_active < 256) n_guarded_mac++;
    end
    if (dut.p1.img_rd && !dut.p1.img_vec && !dut.req_a.en) n_pix_skip++;
    if (dut.p1.flt_rd && dut.req_b.mask != '1) n_lane_skip++;
    if (dut.req_d.en && !dut.gnt_d) n_dma_stall++;
    if (dut.p3.mac_en && dut.p3.img_bits != last_bits) begin n_mode_switch++; last_bits <= dut.p3.img_bits; end
    if (dut.p2.vu_en && dut.p2.vu_op == VOP_RELU) n_relu++;
    if (dut.p2.vu_en && dut.p2.vu_op == VOP_MAX) n_max++;
    if (dut.wb_gw) n_flag_wb++;
    if (instr_valid) n_fetch++;
    if (dma_busy && dut.u_dma.c.huff && !dut.u_dma.c.out && io_in_valid && io_in_ready) n_huff_in++;
    if (dma_busy && dut.u_dma.c.huff && dut.u_dma.c.out && io_out_valid) n_huff_out++;
  end

  // ---------------- reference helpers ----------------
  function automatic int rnd(int x, int b);
    int s, t, q, mx;
    if (b >= 16) return x;
    s = 16 - b; t = x + (1 << (s - 1));
    q = (t >= 0) ? (t / (1 << s)) : -((-t + (1 << s) - 1) / (1 << s));
    mx = 32767 / (1 << s);
    if (q > mx) q = mx;
    return q * (1 << s);
  endfunction
  function automatic int sat(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : int'(v));
  endfunction
  function automatic void encode(word_t w[$], ref word_t ch[$]);
    bit b[$];
    foreach (w[i]) if (w[i] == 0) b.push_back(0); else begin b.push_back(1); for (int k = 15; k >= 0; k--) b.push_back(w[i][k]); end
    while (b.size() % 16) b.push_back(0);
    for (int c = 0; c < b.size(); c += 16) begin word_t x; for (int k = 0; k < 16; k++) x[15-k] = b[c+k]; ch.push_back(x); end
  endfunction

  // ---------------- controller helpers ----------------
  task automatic step(ctrl_t c);
    @(negedge clk); ctrl = c;
  endtask
  task automatic idle(int n);
    repeat (n) step('0);
  endtask
  task automatic dma_run(dma_cmd_t c, word_t data[$]);
    ctrl_t w; w = '0; w.dma_start = 1; w.dma_cmd = c;
    inq = data;
    step(w); step('0);
    while (dma_busy) @(negedge clk);
  endtask
  // one output row: 9 MAC cycles; returns the cycle count from first to last MAC
  task automatic conv_row(int oy, int ib, int fb, output int cycles);
    ctrl_t w; int t0;
    t0 = n_mac_cycles;
    for (int ky = 0; ky < K; ky++)
      for (int kx = 0; kx < K; kx++) begin
        w = '0;
        w.img_rd = 1; w.img_vec = (kx == 0);
        w.img_addr = addr_t'(IMG + (oy + ky) * IW + (kx == 0 ? 0 : 15 + kx));
        w.flt_rd = 1; w.flt_addr = addr_t'(FLT + (ky * K + kx) * 16);
        w.mac_en = 1; w.mac_clr = (ky == 0 && kx == 0);
        w.img_bits = 5'(ib); w.flt_bits = 5'(fb);
        step(w);
      end
    step('0);
    cycles = 0;
    repeat (4) begin @(negedge clk); end
    cycles = n_mac_cycles - t0;
  endtask

  word_t img [IH][IW];
  word_t wgt [K*K][16];
  int    exp_r0 [16][16], exp_pool [16][16];

  initial begin
    word_t data [$], code [$], pooled [$], code_in [$];
    dma_cmd_t c; ctrl_t w; int cyc; longint a;
    int exp_active;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- data ----
    for (int y = 0; y < IH; y++) for (int x = 0; x < IW; x++)
      begin int v; v = int'($urandom % 4001) - 2000; if ($urandom % 2 == 0) v = 0; img[y][x] = word_t'(v); end
    for (int t = 0; t < K*K; t++) for (int f = 0; f < 16; f++)
      begin int v; v = int'($urandom % 4001) - 2000; if ($urandom % 4 == 0) v = 0; wgt[t][f] = word_t'(v); end

    // ---- 1. image and filters through the coded IO ----
    data.delete(); code.delete();
    for (int y = 0; y < IH; y++) for (int x = 0; x < IW; x++) data.push_back(img[y][x]);
    encode(data, code);
    c = '0; c.tgt = DT_DATA; c.huff = 1; c.gen_flags = 1; c.flag_flt = 0; c.addr = IMG; c.nwords = 17'(IH * IW);
    dma_run(c, code);
    data.delete(); code.delete();
    for (int t = 0; t < K*K; t++) for (int f = 0; f < 16; f++) data.push_back(wgt[t][f]);
    encode(data, code);
    c = '0; c.tgt = DT_DATA; c.huff = 1; c.gen_flags = 1; c.flag_flt = 1; c.addr = FLT; c.nwords = 17'(K * K * 16);
    dma_run(c, code);
    chk(inq.size() == 0, "coded input consumed");

    // ---- 2. program words ----
    data.delete();
    for (int i = 0; i < 8; i++) data.push_back(16'($urandom));
    c = '0; c.tgt = DT_PROG; c.addr = 16'd0; c.nwords = 8;
    dma_run(c, data);
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); fetch_en = 1; fetch_addr = 13'(i);
      @(negedge clk); fetch_en = 0;
      chk(instr_valid && instr == data[i], "program fetch");
    end

    // ---- reference ----
    for (int oy = 0; oy < 2; oy++)
      for (int f = 0; f < 16; f++)
        for (int x = 0; x < 16; x++) begin
          int b; b = oy == 0 ? 16 : 7;
          a = 0;
          for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++)
            a += longint'(rnd($signed(wgt[ky*K+kx][f]), b)) * longint'(rnd($signed(img[oy+ky][x+kx]), b));
          if (oy == 0) exp_r0[f][x] = sat(a >>> SH) > 0 ? sat(a >>> SH) : 0;
          else begin
            exp_pool[f][x] = sat(a >>> SH) > exp_r0[f][x] ? sat(a >>> SH) : exp_r0[f][x];
            if (exp_pool[f][x] != 0 && rnd(exp_pool[f][x], WB_BITS) == 0) n_round_zero++;
            exp_pool[f][x] = rnd(exp_pool[f][x], WB_BITS);   // stored at the next layer's precision
          end
        end
    exp_active = 0;
    for (int oy = 0; oy < 2; oy++)
      for (int ky = 0; ky < K; ky++) for (int kx = 0; kx < K; kx++) begin
        int nw, nx; nw = 0; nx = 0;
        for (int f = 0; f < 16; f++) if (wgt[ky*K+kx][f] != 0) nw++;
        for (int x = 0; x < 16; x++) if (img[oy+ky][x+kx] != 0) nx++;
        exp_active += nw * nx;
      end

    // ---- 3. output row 0 at 16 bit, with a DMA load into block 0 in parallel ----
    data.delete();
    for (int i = 0; i < 32; i++) data.push_back(16'($urandom));
    inq = data;
    w = '0; w.dma_start = 1; w.dma_cmd.tgt = DT_DATA; w.dma_cmd.addr = 16'(IMG + 800 * 16); w.dma_cmd.nwords = 32;
    step(w);
    // keep port A busy on block 0 while the DMA gathers its first vector
    for (int i = 0; i < 20; i++) begin
      w = '0; w.vu_en = 1; w.vu_op = VOP_NOP; w.vu_src = VSRC_MEM; w.vu_addr = addr_t'(IMG);
      step(w);
    end
    conv_row(0, 16, 16, cyc);
    chk(cyc == K * K, "row 0: 9 MAC cycles");
    // ---- 4. ReLU + write-back of row 0 into block 3 ----
    for (int f = 0; f < 16 + 3; f++) begin
      w = '0;
      if (f < 16) begin w.vu_en = 1; w.vu_op = VOP_RELU; w.vu_src = VSRC_ACC; w.vu_row = 4'(f); w.vu_shift = 6'(SH); end
      if (f >= 3) begin w.wb_en = 1; w.wb_addr = addr_t'(R0 + (f - 3) * 16); end
      step(w);
    end
    idle(4);
    while (dma_busy) @(negedge clk);
    // ---- 5. output row 1 at 7 bit, max-pooled with row 0 ----
    conv_row(1, 7, 7, cyc);
    chk(cyc == K * K, "row 1: 9 MAC cycles");
    for (int f = 0; f < 16; f++) begin
      w = '0; w.vu_en = 1; w.vu_op = VOP_LOAD; w.vu_src = VSRC_MEM; w.vu_addr = addr_t'(R0 + f * 16);
      step(w);
      w = '0; w.vu_en = 1; w.vu_op = VOP_MAX; w.vu_src = VSRC_ACC; w.vu_row = 4'(f); w.vu_shift = 6'(SH);
      step(w);
      idle(2);
      w = '0; w.wb_en = 1; w.wb_flags = 1; w.wb_bits = 5'(WB_BITS); w.wb_addr = addr_t'(POOL + f * 16);
      step(w);
      idle(1);
    end
    idle(4);
    // ---- 6. coded readout ----
    for (int f = 0; f < 16; f++) for (int x = 0; x < 16; x++) pooled.push_back(word_t'(exp_pool[f][x]));
    code.delete(); encode(pooled, code);
    outq.delete(); outlast.delete();
    c = '0; c.out = 1; c.tgt = DT_DATA; c.huff = 1; c.addr = addr_t'(POOL); c.nwords = 256;
    code_in.delete();
    dma_run(c, code_in);
    inq.delete();
    idle(3);
    chk(outq.size() == code.size(), $sformatf("coded output: %0d chunks, expected %0d", outq.size(), code.size()));
    for (int i = 0; i < outq.size() && i < code.size(); i++)
      chk(outq[i] == code[i] && outlast[i] == (i == code.size() - 1), $sformatf("output chunk %0d", i));
    // guard flags of the pooled output
    for (int f = 0; f < 16; f++) begin
      flags_t e; for (int x = 0; x < 16; x++) e[x] = exp_pool[f][x] != 0;
      chk(dut.u_guard.u_img.mem[512 + f] == e, "written-back guard flags");
    end
    // the parallel DMA load arrived
    for (int r = 0; r < 2; r++) begin
      w = '0; w.vu_en = 1; w.vu_op = VOP_LOAD; w.vu_src = VSRC_MEM; w.vu_addr = addr_t'(IMG + (800 + r) * 16);
      step(w); idle(4);
      for (int k = 0; k < 16; k++) chk(vu_out[k] == data[r * 16 + k], "parallel DMA data");
    end
    chk(n_active_sum == exp_active, $sformatf("active MACs %0d, expected %0d", n_active_sum, exp_active));

    $display("mechanisms: mac_cycles=%0d guarded_mac_cycles=%0d active_macs=%0d/%0d pixel_fetch_skips=%0d filter_lane_skips=%0d",
             n_mac_cycles, n_guarded_mac, n_active_sum, n_mac_cycles * 256, n_pix_skip, n_lane_skip);
    $display("mechanisms: dma_stalls=%0d precision_switches=%0d huff_in_chunks=%0d huff_out_chunks=%0d relu=%0d maxpool=%0d flag_writebacks=%0d fetches=%0d rounded_to_zero=%0d",
             n_dma_stall, n_mode_switch, n_huff_in, n_huff_out, n_relu, n_max, n_flag_wb, n_fetch, n_round_zero);
    chk(n_guarded_mac > 0, "guarded MACs happened");
    chk(n_pix_skip > 0, "guarded pixel fetch happened");
    chk(n_lane_skip > 0, "guarded filter lanes happened");
    chk(n_dma_stall > 0, "DMA stall happened");
    chk(n_mode_switch > 0, "precision switch happened");
    chk(n_huff_in > 0 && n_huff_out > 0, "Huffman in/out happened");
    chk(n_relu > 0 && n_max > 0, "ReLU and max-pool happened");
    chk(n_flag_wb > 0, "flag write-back happened");
    chk(n_round_zero > 0, "write-back rounding created zeros (guarded in the next layer)");
    chk(n_fetch == 8, "program fetches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

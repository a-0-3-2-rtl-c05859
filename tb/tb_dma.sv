// tb_dma: the DMA connected to a real data memory.  Checks, against models
// kept in the testbench:
//  1. a Huffman-coded IO stream (coded by the testbench) lands in the data
//     memory as vectors, with the guard flags of each vector written out;
//     meanwhile a processor port occupies the same block for a while, so the
//     DMA must wait (stall counted);
//  2. the same words are read back raw and 3. Huffman coded, compared with
//     the reference code bits;
//  4. raw words go to program memory and 5. to the filter guard memory.
module tb_dma;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  dma_cmd_t cmd = '0;
  word_t io_in_data, io_out_data;
  logic io_in_valid, io_in_ready, io_out_valid, io_out_last, io_out_ready = 0;
  mem_req_t req_a = '0, req_b = '0, req_d;
  logic gnt_a, gnt_b, gnt_d;
  vec_t rdata_a, rdata_b, rdata_d;
  logic gw_img, gw_flt, gw_gnt, pw_en;
  logic [9:0] gw_addr; flags_t gw_flags;
  logic [12:0] pw_addr; word_t pw_data;
  int checks = 0, failures = 0, stalls = 0;

  dma dut (.*);
  data_mem u_mem (.clk, .rst_n, .req_a, .req_b, .req_d, .gnt_a, .gnt_b, .gnt_d, .rdata_a, .rdata_b, .rdata_d);
  assign gw_gnt = 1'b1;
  always #5 clk = ~clk;
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // IO input queue
  word_t inq [$];
  always @(negedge clk) begin
    io_in_valid = inq.size() != 0 && ($urandom % 4 != 0);
    io_in_data  = inq.size() ? inq[0] : '0;
  end
  // IO output, guard and program captures
  word_t outq [$]; logic outlast [$];
  flags_t gmem_i [1024], gmem_f [1024]; word_t pmem [8192];
  always @(posedge clk) if (rst_n) begin
    if (io_in_valid && io_in_ready) void'(inq.pop_front());
    if (io_out_valid && io_out_ready) begin outq.push_back(io_out_data); outlast.push_back(io_out_last); end
    if (gw_img && gw_gnt) gmem_i[gw_addr] <= gw_flags;
    if (gw_flt && gw_gnt) gmem_f[gw_addr] <= gw_flags;
    if (pw_en) pmem[pw_addr] <= pw_data;
    if (req_d.en && !gnt_d) stalls++;
    io_out_ready <= ($urandom % 5) != 0;
  end

  function automatic void encode(word_t w[$], ref word_t ch[$]);
    bit b[$];
    foreach (w[i]) if (w[i] == 0) b.push_back(0); else begin b.push_back(1); for (int k = 15; k >= 0; k--) b.push_back(w[i][k]); end
    while (b.size() % 16) b.push_back(0);
    for (int c = 0; c < b.size(); c += 16) begin word_t x; for (int k = 0; k < 16; k++) x[15-k] = b[c+k]; ch.push_back(x); end
  endfunction

  task automatic run(dma_cmd_t c);
    @(negedge clk); cmd = c; start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    word_t words [$]; word_t code [$];
    dma_cmd_t c;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) words.push_back(($urandom % 3 == 0) ? '0 : 16'($urandom | 1));
    encode(words, code);
    inq = code;
    // 1. coded IO -> block 1, rows 4..7, with image guard flags
    c = '0; c.tgt = DT_DATA; c.huff = 1; c.gen_flags = 1; c.addr = 16'(16384 + 64); c.nwords = 64;
    fork
      run(c);
      begin  // processor port A holds block 1 for 150 cycles
        @(negedge clk);
        req_a.en = 1; req_a.vec = 1; req_a.mask = '1; req_a.addr = 16'(16384 + 512);
        repeat (150) @(negedge clk);
        req_a = '0;
      end
    join
    chk(stalls > 0, "DMA stalled behind the processor port");
    chk(inq.size() == 0, "all chunks consumed");
    for (int r = 0; r < 4; r++) begin
      @(negedge clk); req_b = '0; req_b.en = 1; req_b.vec = 1; req_b.mask = '1; req_b.addr = 16'(16384 + 64 + r * 16);
      @(negedge clk); req_b = '0;
      for (int k = 0; k < 16; k++) begin
        chk(rdata_b[k] == words[r * 16 + k], "data word");
        chk(gmem_i[4 + r][k] == (words[r * 16 + k] != 0), "guard flag");
      end
    end
    // 2. raw readback
    outq.delete(); outlast.delete();
    c = '0; c.out = 1; c.tgt = DT_DATA; c.addr = 16'(16384 + 64); c.nwords = 64;
    run(c);
    repeat (3) @(negedge clk);
    chk(outq.size() == 64, "raw out count");
    for (int i = 0; i < outq.size() && i < 64; i++) chk(outq[i] == words[i] && outlast[i] == (i == 63), "raw out word");
    // 3. coded readback
    outq.delete(); outlast.delete();
    c.huff = 1;
    run(c);
    repeat (3) @(negedge clk);
    chk(outq.size() == code.size(), "coded out count");
    for (int i = 0; i < outq.size() && i < code.size(); i++)
      chk(outq[i] == code[i] && outlast[i] == (i == code.size() - 1), "coded out chunk");
    // 4. program load
    words.delete();
    for (int i = 0; i < 20; i++) words.push_back(16'($urandom));
    inq = words;
    c = '0; c.tgt = DT_PROG; c.addr = 16'd100; c.nwords = 20;
    run(c);
    @(negedge clk);
    for (int i = 0; i < 20; i++) chk(pmem[100 + i] == words[i], "program word");
    // 5. filter guard load
    words.delete();
    for (int i = 0; i < 8; i++) words.push_back(16'($urandom));
    inq = words;
    c = '0; c.tgt = DT_FGRD; c.addr = 16'd40; c.nwords = 8;
    run(c);
    @(negedge clk);
    for (int i = 0; i < 8; i++) chk(gmem_f[40 + i] == words[i], "filter guard row");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_data_mem: fills two blocks with vector writes through the DMA port, then
// (1) reads them back as vectors on ports A and B in parallel, (2) does
// single-word reads and writes, (3) checks that masked (guarded) lanes read
// zero and are not written, and (4) checks the block arbitration: the DMA port
// is refused while a processor port uses its block, granted otherwise.
module tb_data_mem;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 0;
  mem_req_t req_a = '0, req_b = '0, req_d = '0;
  logic gnt_a, gnt_b, gnt_d;
  vec_t rdata_a, rdata_b, rdata_d;
  int checks = 0, failures = 0;
  word_t model [int];
  data_mem dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic word_t mget(int a);
    return model.exists(a) ? model[a] : '0;
  endfunction

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // vector writes, blocks 0 and 2, rows 0..31 (DMA port)
    for (int blk = 0; blk < 4; blk += 2)
      for (int row = 0; row < 32; row++) begin
        @(negedge clk);
        req_d = '0; req_d.en = 1; req_d.we = 1; req_d.vec = 1; req_d.mask = '1;
        req_d.addr = addr_t'(blk * 16384 + row * 16);
        for (int k = 0; k < 16; k++) begin
          req_d.wdata[k] = 16'($urandom);
          model[blk * 16384 + row * 16 + k] = req_d.wdata[k];
        end
      end
    @(negedge clk); req_d = '0;
    // parallel vector reads on A (block 0) and B (block 2)
    for (int row = 0; row < 32; row++) begin
      @(negedge clk);
      req_a = '0; req_a.en = 1; req_a.vec = 1; req_a.mask = '1; req_a.addr = addr_t'(row * 16);
      req_b = '0; req_b.en = 1; req_b.vec = 1; req_b.mask = 16'h5A5A; req_b.addr = addr_t'(2 * 16384 + row * 16);
      @(negedge clk);
      req_a = '0; req_b = '0;
      for (int k = 0; k < 16; k++) begin
        chk(rdata_a[k] == mget(row * 16 + k), "vector read A");
        chk(rdata_b[k] == (k % 2 == 1 && ((16'h5A5A >> k) & 1) ? mget(2 * 16384 + row * 16 + k) :
                          (((16'h5A5A >> k) & 1) ? mget(2 * 16384 + row * 16 + k) : 16'h0)), "masked read B");
      end
    end
    // single-word writes on A into block 1, reads back on B
    for (int i = 0; i < 40; i++) begin
      int a; a = 16384 + ($urandom % 512);
      @(negedge clk);
      req_a = '0; req_a.en = 1; req_a.we = 1; req_a.addr = addr_t'(a);
      req_a.wdata = '0; req_a.wdata[a % 16] = 16'($urandom); model[a] = req_a.wdata[a % 16];
      @(negedge clk); req_a = '0;
      req_b = '0; req_b.en = 1; req_b.addr = addr_t'(a);
      @(negedge clk); req_b = '0;
      chk(rdata_b[a % 16] == model[a], "single read");
      for (int k = 0; k < 16; k++) if (k != a % 16) chk(rdata_b[k] == 0, "other lanes zero");
    end
    // masked vector write leaves masked banks untouched
    @(negedge clk);
    req_a = '0; req_a.en = 1; req_a.we = 1; req_a.vec = 1; req_a.mask = 16'h00FF; req_a.addr = 16'd32;
    req_a.wdata = '1;
    for (int k = 0; k < 8; k++) model[32 + k] = 16'hFFFF;
    @(negedge clk); req_a = '0; req_a.en = 1; req_a.vec = 1; req_a.mask = '1; req_a.addr = 16'd32;
    @(negedge clk); req_a = '0;
    for (int k = 0; k < 16; k++) chk(rdata_a[k] == mget(32 + k), "masked write");
    // arbitration
    @(negedge clk);
    req_a = '0; req_a.en = 1; req_a.vec = 1; req_a.mask = '1; req_a.addr = 16'd0;
    req_d = '0; req_d.en = 1; req_d.vec = 1; req_d.mask = '1; req_d.addr = 16'd16;
    #1 chk(gnt_a && !gnt_d, "DMA refused in a busy block");
    req_d.addr = 16'(3 * 16384);
    #1 chk(gnt_a && gnt_d, "DMA granted in a free block");
    req_b = '0; req_b.en = 1; req_b.vec = 1; req_b.addr = 16'(3 * 16384);
    #1 chk(gnt_a && gnt_b && !gnt_d, "DMA loses to port B");
    @(negedge clk); req_a = '0; req_b = '0; req_d = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

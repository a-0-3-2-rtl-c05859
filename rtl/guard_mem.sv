// guard_mem: the 4 kB guard-flag memory.
//
// Two 2 kB single-port macros of 1024 x 16 flags: one for image words, one for
// filter words.  Flag bit k of row r belongs to data word r*16+k of a data
// block (flag = 1: the word is nonzero), so a single read yields the 16 flags
// of a whole data vector and the 16+16 flags of one array cycle come from one
// read of each memory.  Each memory has a read port and a write port sharing
// the macro: a write in the same cycle as a read wins, the read is refused and
// an assertion flags it.  Timing: flags appear one clock after the read.
// Capacity and purpose follow the chip; the split into image and filter halves
// and the bit mapping are this implementation's.
module guard_mem
  import cnn_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // image flags
  input  logic                     img_re,
  input  logic [$clog2(DEPTH)-1:0] img_raddr,
  output flags_t                   img_rflags,
  input  logic                     img_we,
  input  logic [$clog2(DEPTH)-1:0] img_waddr,
  input  flags_t                   img_wflags,
  // filter flags
  input  logic                     flt_re,
  input  logic [$clog2(DEPTH)-1:0] flt_raddr,
  output flags_t                   flt_rflags,
  input  logic                     flt_we,
  input  logic [$clog2(DEPTH)-1:0] flt_waddr,
  input  flags_t                   flt_wflags
);
  sram_sp #(.DEPTH(DEPTH), .WIDTH(N)) u_img (
    .clk, .ce(img_re || img_we), .we(img_we),
    .addr(img_we ? img_waddr : img_raddr), .wdata(img_wflags), .rdata(img_rflags)
  );
  sram_sp #(.DEPTH(DEPTH), .WIDTH(N)) u_flt (
    .clk, .ce(flt_re || flt_we), .we(flt_we),
    .addr(flt_we ? flt_waddr : flt_raddr), .wdata(flt_wflags), .rdata(flt_rflags)
  );

  a_img_rw: assert property (@(posedge clk) disable iff (!rst_n) !(img_re && img_we))
    else $error("guard_mem: image flag read and write in the same cycle");
  a_flt_rw: assert property (@(posedge clk) disable iff (!rst_n) !(flt_re && flt_we))
    else $error("guard_mem: filter flag read and write in the same cycle");
endmodule

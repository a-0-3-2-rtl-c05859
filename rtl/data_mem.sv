// data_mem: the 128 kB data memory, organised for data locality.
//
// 64 single-port 2 kB macros form 4 blocks (32 kB each) of 16 parallel banks
// of 1024 x 16 bit.  Three ports can work in the same cycle, each in a
// different block: two processor ports (A, B) and one DMA port (D).  An access
// is either a vector (the same row in all 16 banks, i.e. 16 consecutive
// words) or a single word (one bank).  In a vector access, banks whose mask
// bit is clear are not enabled at all: this is the guarded fetch, and the
// corresponding lanes read as zero.  A single-word write takes its data from
// lane addr[3:0] of wdata; a single-word read returns the word in that lane.
//
// Arbitration per block: A always wins, B wins over D, D waits (gnt_d low)
// while a processor port uses its block.  A and B in the same block in the
// same cycle is a program error, flagged by an assertion; B is then refused.
// Timing: read data appears on rdata_* one clock after a granted access;
// lanes not read show zero.  The organisation (blocks, banks, three ports,
// vector or single access) follows the chip; the arbitration and the address
// layout (see cnn_pkg) are this implementation's.
module data_mem
  import cnn_pkg::*;
#(
  parameter int unsigned NB    = 4,     // blocks
  parameter int unsigned NK    = 16,    // banks per block (= vector lanes)
  parameter int unsigned DEPTH = 1024   // words per bank
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req_a,
  input  mem_req_t req_b,
  input  mem_req_t req_d,
  output logic     gnt_a,
  output logic     gnt_b,
  output logic     gnt_d,
  output vec_t     rdata_a,
  output vec_t     rdata_b,
  output vec_t     rdata_d
);
  localparam int unsigned RAW = $clog2(DEPTH);

  logic [1:0] blk_a, blk_b, blk_d;
  assign blk_a = req_a.addr[15:14];
  assign blk_b = req_b.addr[15:14];
  assign blk_d = req_d.addr[15:14];

  always_comb begin
    gnt_a = req_a.en;
    gnt_b = req_b.en && !(req_a.en && blk_a == blk_b);
    gnt_d = req_d.en && !(req_a.en && blk_a == blk_d) && !(gnt_b && blk_b == blk_d);
  end

  // lanes touched by a request
  function automatic flags_t lanes(mem_req_t r);
    flags_t l;
    if (r.vec) l = r.mask;
    else begin
      l = '0;
      l[r.addr[3:0]] = 1'b1;
    end
    return l;
  endfunction

  logic [NB-1:0][NK-1:0][W-1:0] q;   // macro outputs

  for (genvar b = 0; b < NB; b++) begin : g_blk
    for (genvar k = 0; k < NK; k++) begin : g_bank
      logic           ce, we;
      logic [RAW-1:0] ad;
      word_t          wd;
      always_comb begin
        ce = 1'b0; we = 1'b0; ad = req_a.addr[4 +: RAW]; wd = req_a.wdata[k];
        if (gnt_a && blk_a == 2'(b) && lanes(req_a)[k]) begin
          ce = 1'b1; we = req_a.we; ad = req_a.addr[4 +: RAW]; wd = req_a.wdata[k];
        end else if (gnt_b && blk_b == 2'(b) && lanes(req_b)[k]) begin
          ce = 1'b1; we = req_b.we; ad = req_b.addr[4 +: RAW]; wd = req_b.wdata[k];
        end else if (gnt_d && blk_d == 2'(b) && lanes(req_d)[k]) begin
          ce = 1'b1; we = req_d.we; ad = req_d.addr[4 +: RAW]; wd = req_d.wdata[k];
        end
      end
      sram_sp #(.DEPTH(DEPTH), .WIDTH(W)) u_bank (
        .clk, .ce, .we, .addr(ad), .wdata(wd), .rdata(q[b][k])
      );
    end
  end

  // read-data steering: remember which block and lanes each port read
  logic [1:0] rblk_a, rblk_b, rblk_d;
  flags_t     rl_a, rl_b, rl_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rblk_a <= '0; rblk_b <= '0; rblk_d <= '0;
      rl_a <= '0; rl_b <= '0; rl_d <= '0;
    end else begin
      rblk_a <= blk_a; rblk_b <= blk_b; rblk_d <= blk_d;
      rl_a <= (gnt_a && !req_a.we) ? lanes(req_a) : '0;
      rl_b <= (gnt_b && !req_b.we) ? lanes(req_b) : '0;
      rl_d <= (gnt_d && !req_d.we) ? lanes(req_d) : '0;
    end
  end

  always_comb begin
    for (int k = 0; k < NK; k++) begin
      rdata_a[k] = rl_a[k] ? q[rblk_a][k] : '0;
      rdata_b[k] = rl_b[k] ? q[rblk_b][k] : '0;
      rdata_d[k] = rl_d[k] ? q[rblk_d][k] : '0;
    end
  end

  // the two processor ports must address different blocks
  a_no_proc_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    !(req_a.en && req_b.en && blk_a == blk_b))
    else $error("data_mem: ports A and B access block %0d in the same cycle", blk_a);
endmodule

// cnn_pkg: types and constants shared by the precision-scalable ConvNet processor.
//
// Words are 16-bit two's-complement fixed point (the widest precision the
// processor supports); lower precisions keep the word MSB-aligned with the
// unused LSBs forced to zero.  Vectors are 16 words, one per SIMD lane, one
// per data-memory bank.  The data-memory word address is 16 bits:
//   addr[15:14] block (4 blocks of 32 kB)
//   addr[13:4]  row inside the block (1024 rows)
//   addr[3:0]   bank (16 banks of 2 kB)
// The guard flag of data word `addr` lives at row addr[13:4], bit addr[3:0]
// of a guard memory, so one guard memory of 1024 x 16 flags covers one block.
// The block/bank/row split follows the memory organisation of the chip; the
// bit positions and the per-cycle control word are this implementation's own.
package cnn_pkg;

  localparam int unsigned W      = 16;  // data word width
  localparam int unsigned ACC_W  = 48;  // MAC accumulator width
  localparam int unsigned N      = 16;  // SIMD lanes / banks / array side
  localparam int unsigned NBLK   = 4;   // data memory blocks
  localparam int unsigned ROWS   = 1024;// words per bank
  localparam int unsigned AW     = 16;  // data memory word address width
  localparam int unsigned GAW    = 10;  // guard memory row address width
  localparam int unsigned PAW    = 13;  // program memory address width (8192 x 16 bit = 16 kB)
  localparam int unsigned BITS_W = 5;   // precision field, 1..16

  typedef logic [W-1:0]        word_t;
  typedef logic [N-1:0][W-1:0] vec_t;
  typedef logic [N-1:0]        flags_t;
  typedef logic [AW-1:0]       addr_t;

  // One data-memory access.  vec=1: all 16 banks of row addr[13:4] (lanes with
  // mask=0 are not fetched/written); vec=0: only bank addr[3:0].
  typedef struct packed {
    logic   en;
    logic   we;
    logic   vec;
    flags_t mask;
    addr_t  addr;
    vec_t   wdata;
  } mem_req_t;

  // 1-D SIMD unit operations (max-pool, ReLU, misc).
  typedef enum logic [2:0] {
    VOP_NOP  = 3'd0,  // keep output register
    VOP_LOAD = 3'd1,  // out = in
    VOP_RELU = 3'd2,  // out = max(in, 0)
    VOP_MAX  = 3'd3,  // out = max(out, in)   (max-pool step)
    VOP_ADD  = 3'd4,  // out = sat(out + in)
    VOP_MIN  = 3'd5   // out = min(out, in)
  } vop_t;

  typedef enum logic {VSRC_ACC = 1'b0, VSRC_MEM = 1'b1} vsrc_t;

  // DMA transfer targets.
  typedef enum logic [1:0] {
    DT_DATA  = 2'd0,
    DT_IGRD  = 2'd1,
    DT_FGRD  = 2'd2,
    DT_PROG  = 2'd3
  } dma_tgt_t;

  typedef struct packed {
    logic     out;       // 0: IO -> memory, 1: data memory -> IO
    dma_tgt_t tgt;       // memory written (IO -> memory); data memory only for out
    logic     huff;      // IO stream is Huffman coded
    logic     gen_flags; // data-memory writes also write their guard flags
    logic     flag_flt;  // ... into the filter (1) or image (0) guard memory
    addr_t    addr;      // start: data word address (16-aligned) or guard/program word
    logic [16:0] nwords; // words to move (multiple of 16 for DT_DATA)
  } dma_cmd_t;

  // Per-cycle control word issued by the (external) controller.
  typedef struct packed {
    // 2-D array operation: fetch image and filter operands, then MAC
    logic   img_rd;      // fetch image operand
    logic   img_vec;     // 1: load 16 pixels in parallel, 0: shift one pixel in
    addr_t  img_addr;
    logic   flt_rd;      // fetch 16 filter weights (one vector)
    addr_t  flt_addr;
    logic   mac_en;      // accumulate into the array
    logic   mac_clr;     // start a new accumulation (acc = product)
    logic [BITS_W-1:0] img_bits;  // image precision 1..16
    logic [BITS_W-1:0] flt_bits;  // filter precision 1..16
    // 1-D SIMD unit
    logic   vu_en;
    vop_t   vu_op;
    vsrc_t  vu_src;
    logic [3:0] vu_row;  // accumulator row read out (VSRC_ACC)
    logic [5:0] vu_shift;// arithmetic right shift of the accumulators
    addr_t  vu_addr;     // vector read address (VSRC_MEM)
    // write-back of the SIMD output register
    logic   wb_en;
    addr_t  wb_addr;     // vector address
    logic   wb_flags;    // also write the output's guard flags (image guard memory)
    logic [BITS_W-1:0] wb_bits;   // precision of the stored words (next layer's), 1..16
    // DMA
    logic     dma_start;
    dma_cmd_t dma_cmd;
  } ctrl_t;

  // Round a word to `bits` bits of precision: add half an LSB of the target
  // precision, clear the dropped LSBs, saturate on positive overflow.
  function automatic word_t round_word(word_t x, logic [BITS_W-1:0] bits);
    logic [4:0]       s;
    logic [W:0]       t;
    word_t            mask;
    if (bits >= BITS_W'(W) || bits == '0) return x;
    s    = 5'(W - int'(bits));
    mask = word_t'('1) << s;
    t    = {x[W-1], x} + ((W+1)'(1) << (s - 5'd1));
    if (t[W] != t[W-1]) return word_t'(16'h7FFF) & mask;
    return t[W-1:0] & mask;
  endfunction

endpackage

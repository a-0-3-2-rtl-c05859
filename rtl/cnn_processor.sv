// cnn_processor: top level of the precision-scalable ConvNet processor.
//
// A 16x16 2-D SIMD MAC array takes 16 filter weights (one per row, from 16
// different filters) and 16 image pixels (one per column, 16 neighbouring
// outputs) per cycle.  Pixels enter through the image shift register: 16 in
// parallel at the start of a kernel row, then one per cycle, so that a K-tap
// kernel row needs one vector fetch and K-1 single-word fetches on the image
// side.  Both operand paths round to a per-layer precision (1..16 bits) and
// are guarded by 1-bit flags from the guard memory: a zero operand is not
// fetched from its SRAM bank and the MACs it would feed are not clocked.
// Around the array sit the 128 kB data memory (4 blocks x 16 banks), the 4 kB
// guard memory, the 16 kB program memory, the 16-lane 1-D SIMD unit (ReLU,
// max-pool, requantisation of the 48-bit accumulators) and a DMA with a
// two-symbol Huffman codec on the IO stream.
//
// The controller is outside this module: each cycle it issues one ctrl_t word
// (see cnn_pkg), and it can fetch its program through the fetch_* port.
// Pipeline of one ctrl word issued in cycle t:
//   t    read the image / filter guard flags of the operands
//   t+1  fetch the operands from the data memory, zero-flagged banks not
//        enabled (port A image or SIMD source, port B filters or write-back);
//        write-back of the SIMD output rounded to wb_bits (and of the flags
//        of the rounded words)
//   t+2  operands enter the image shift register / filter guard registers;
//        the SIMD unit samples its source (accumulator row or memory vector)
//   t+3  the array multiplies and accumulates (acc visible after t+3);
//        the SIMD unit computes (vu_out visible after t+3)
// Precision fields take effect at t+3, with the MAC they belong to.
// The voltage-scalable supply of the array, clock-gating cells and pads are
// physical parts with no RTL here; register enables stand in for the clock
// gates.  The pipeline timing and control word are this implementation's.
module cnn_processor
  import cnn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  ctrl_t       ctrl,
  // IO stream (through the DMA)
  input  word_t       io_in_data,
  input  logic        io_in_valid,
  output logic        io_in_ready,
  output word_t       io_out_data,
  output logic        io_out_valid,
  output logic        io_out_last,
  input  logic        io_out_ready,
  output logic        dma_busy,
  output logic        dma_done,
  // program fetch for the controller
  input  logic        fetch_en,
  input  logic [PAW-1:0] fetch_addr,
  output logic        fetch_gnt,
  output word_t       instr,
  output logic        instr_valid,
  // results and activity
  output vec_t        vu_out,
  output flags_t      vu_flags,
  output logic [8:0]  mac_active     // MACs that worked this cycle
);
  // ---------------- control pipeline ----------------
  ctrl_t p1, p2, p3;
  flags_t iflags2, fflags2;          // guard flags travelling with p2
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1 <= '0; p2 <= '0; p3 <= '0;
    end else begin
      p1 <= ctrl; p2 <= p1; p3 <= p2;
    end
  end

  // ---------------- write-back rounding ----------------
  // The SIMD output is stored at the next layer's precision; its guard flags
  // are taken after rounding, so words that round to zero are guarded too.
  vec_t   wb_data;
  flags_t wb_flagv;
  for (genvar i = 0; i < N; i++) begin : g_wb
    round_unit u_round (.din(vu_out[i]), .bits(p1.wb_bits), .dout(wb_data[i]));
    assign wb_flagv[i] = wb_data[i] != '0;
  end

  // ---------------- guard memory ----------------
  flags_t img_rflags, flt_rflags;
  logic   gw_img, gw_flt, gw_gnt, wb_gw;
  logic [9:0] gw_addr;
  flags_t gw_flags;
  logic   img_re, flt_re;

  assign img_re = ctrl.img_rd;
  assign flt_re = ctrl.flt_rd;
  assign wb_gw  = p1.wb_en && p1.wb_flags;
  assign gw_gnt = (gw_img && !img_re && !wb_gw) || (gw_flt && !flt_re);

  guard_mem u_guard (
    .clk, .rst_n,
    .img_re     (img_re),
    .img_raddr  (ctrl.img_addr[13:4]),
    .img_rflags (img_rflags),
    .img_we     (wb_gw || (gw_img && gw_gnt)),
    .img_waddr  (wb_gw ? p1.wb_addr[13:4] : gw_addr),
    .img_wflags (wb_gw ? wb_flagv : gw_flags),
    .flt_re     (flt_re),
    .flt_raddr  (ctrl.flt_addr[13:4]),
    .flt_rflags (flt_rflags),
    .flt_we     (gw_flt && gw_gnt),
    .flt_waddr  (gw_addr),
    .flt_wflags (gw_flags)
  );

  // ---------------- data memory ----------------
  mem_req_t req_a, req_b, req_d;
  logic     gnt_a, gnt_b, gnt_d;
  vec_t     rdata_a, rdata_b, rdata_d;
  logic     pix_flag1;

  assign pix_flag1 = img_rflags[p1.img_addr[3:0]];

  always_comb begin
    req_a = '0;
    if (p1.img_rd) begin
      req_a.en   = p1.img_vec || pix_flag1;   // a zero pixel is not fetched
      req_a.vec  = p1.img_vec;
      req_a.mask = img_rflags;
      req_a.addr = p1.img_addr;
    end else if (p1.vu_en && p1.vu_src == VSRC_MEM) begin
      req_a.en   = 1'b1;
      req_a.vec  = 1'b1;
      req_a.mask = '1;
      req_a.addr = p1.vu_addr;
    end
    req_b = '0;
    if (p1.flt_rd) begin
      req_b.en   = 1'b1;
      req_b.vec  = 1'b1;
      req_b.mask = flt_rflags;
      req_b.addr = p1.flt_addr;
    end else if (p1.wb_en) begin
      req_b.en    = 1'b1;
      req_b.we    = 1'b1;
      req_b.vec   = 1'b1;
      req_b.mask  = '1;
      req_b.addr  = p1.wb_addr;
      req_b.wdata = wb_data;
    end
  end

  data_mem u_dmem (
    .clk, .rst_n,
    .req_a, .req_b, .req_d,
    .gnt_a, .gnt_b, .gnt_d,
    .rdata_a, .rdata_b, .rdata_d
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iflags2 <= '0; fflags2 <= '0;
    end else begin
      iflags2 <= p1.img_vec ? img_rflags : {{(N-1){1'b0}}, pix_flag1};
      fflags2 <= flt_rflags;
    end
  end

  // ---------------- operand stages ----------------
  vec_t   xq, wq;
  flags_t xf, wf;

  image_fifo #(.LANES(N)) u_fifo (
    .clk, .rst_n,
    .load     (p2.img_rd && p2.img_vec),
    .shift    (p2.img_rd && !p2.img_vec),
    .vec_in   (rdata_a),
    .vec_flag (iflags2),
    .pix_in   (rdata_a[p2.img_addr[3:0]]),
    .pix_flag (iflags2[0]),
    .bits     (p3.img_bits),
    .q        (xq),
    .qflag    (xf)
  );

  precision_guard #(.LANES(N)) u_fguard (
    .clk, .rst_n,
    .load    (p2.flt_rd),
    .din     (rdata_b),
    .flag_in (fflags2),
    .bits    (p3.flt_bits),
    .dout    (wq),
    .flag    (wf)
  );

  // ---------------- 2-D MAC array ----------------
  logic [N-1:0][N-1:0][ACC_W-1:0] acc;

  mac_array #(.NR(N), .NC(N), .AW_ACC(ACC_W)) u_array (
    .clk, .rst_n,
    .en       (p3.mac_en),
    .clr      (p3.mac_clr),
    .w        (wq),
    .wflag    (wf),
    .x        (xq),
    .xflag    (xf),
    .acc      (acc),
    .n_active (mac_active)
  );

  // ---------------- 1-D SIMD unit ----------------
  vector_unit #(.LANES(N), .AW_ACC(ACC_W)) u_vu (
    .clk, .rst_n,
    .en      (p2.vu_en),
    .op      (p2.vu_op),
    .src     (p2.vu_src),
    .shift   (p2.vu_shift),
    .acc_row (acc[p2.vu_row]),
    .mem_vec (rdata_a),
    .out     (vu_out),
    .out_flags (vu_flags)
  );

  // ---------------- program memory ----------------
  logic           pw_en;
  logic [PAW-1:0] pw_addr;
  word_t          pw_data;

  prog_mem #(.DEPTH(1 << PAW)) u_pmem (
    .clk, .rst_n,
    .wr_en (pw_en), .wr_addr(pw_addr), .wr_data(pw_data),
    .fetch_en, .fetch_addr, .fetch_gnt, .instr, .instr_valid
  );

  // ---------------- DMA with Huffman codec ----------------
  dma u_dma (
    .clk, .rst_n,
    .start (ctrl.dma_start),
    .cmd   (ctrl.dma_cmd),
    .busy  (dma_busy),
    .done  (dma_done),
    .io_in_data, .io_in_valid, .io_in_ready,
    .io_out_data, .io_out_valid, .io_out_last, .io_out_ready,
    .req_d, .gnt_d, .rdata_d,
    .gw_img, .gw_flt, .gw_addr, .gw_flags, .gw_gnt,
    .pw_en, .pw_addr, .pw_data
  );

  // ---------------- control-word rules ----------------
  a_port_a: assert property (@(posedge clk) disable iff (!rst_n)
    !(p1.img_rd && p1.vu_en && p1.vu_src == VSRC_MEM))
    else $error("cnn_processor: image fetch and SIMD memory read share port A");
  a_port_b: assert property (@(posedge clk) disable iff (!rst_n)
    !(p1.flt_rd && p1.wb_en))
    else $error("cnn_processor: filter fetch and write-back share port B");
  a_guard_rw: assert property (@(posedge clk) disable iff (!rst_n)
    !(img_re && wb_gw))
    else $error("cnn_processor: image flag read collides with flag write-back");
endmodule

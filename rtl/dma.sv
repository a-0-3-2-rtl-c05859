// dma: moves data between the chip's IO stream and its memories.
//
// One transfer at a time, described by a dma_cmd_t given with `start`:
//  * IO -> data memory: words are gathered into a 16-word vector and written
//    with one vector access through the data memory's DMA port (waiting while
//    a processor port holds the block).  With gen_flags, the vector's 16
//    guard flags (word != 0) are then written to the image or filter guard
//    memory row addr[13:4], so the sparsity of the data is known before a
//    layer starts.
//  * IO -> guard memory or program memory: one word per write.
//  * data memory -> IO: vector reads, then the 16 words are sent one by one.
// With `huff` set the IO stream is coded by the two-symbol Huffman code
// (huff_dec on the way in, huff_enc on the way out, out_last marks the final
// chunk); otherwise raw 16-bit words are moved.  Timing: up to one word per
// cycle on the IO side; `done` pulses for one cycle at the end.  The DMA's
// place between the IO codec and the memories, and its vector access, follow
// the chip; the descriptor and this sequencing are this implementation's.
module dma
  import cnn_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  dma_cmd_t cmd,
  output logic     busy,
  output logic     done,
  // IO stream
  input  word_t    io_in_data,
  input  logic     io_in_valid,
  output logic     io_in_ready,
  output word_t    io_out_data,
  output logic     io_out_valid,
  output logic     io_out_last,
  input  logic     io_out_ready,
  // data memory DMA port
  output mem_req_t req_d,
  input  logic     gnt_d,
  input  vec_t     rdata_d,
  // guard memory write
  output logic     gw_img,
  output logic     gw_flt,
  output logic [9:0] gw_addr,
  output flags_t   gw_flags,
  input  logic     gw_gnt,
  // program memory write
  output logic     pw_en,
  output logic [PAW-1:0] pw_addr,
  output word_t    pw_data
);
  typedef enum logic [2:0] {S_IDLE, S_GATHER, S_VWR, S_GWR, S_VRD, S_VCAP, S_SEND, S_DRAIN} state_t;
  state_t      st;
  dma_cmd_t    c;
  addr_t       addr;      // current address
  logic [16:0] left;      // words still to take from / give to IO
  logic [3:0]  lane;
  vec_t        vbuf;

  // ---------------- IO-side word stream ----------------
  word_t w_in;  logic w_in_valid, w_in_ready;       // towards memory
  word_t w_out; logic w_out_valid, w_out_ready, w_out_last; // towards IO

  word_t dec_data; logic dec_valid, dec_in_ready, dec_busy, dec_done;
  huff_dec u_dec (
    .clk, .rst_n,
    .start    (start && !busy && cmd.huff && !cmd.out),
    .nwords   (cmd.nwords),
    .in_data  (io_in_data), .in_valid(io_in_valid && c.huff && busy && !c.out),
    .in_ready (dec_in_ready),
    .out_data (dec_data), .out_valid(dec_valid), .out_ready(w_in_ready && c.huff),
    .busy     (dec_busy), .done(dec_done)
  );

  word_t enc_data; logic enc_valid, enc_last, enc_in_ready;
  huff_enc u_enc (
    .clk, .rst_n,
    .in_data  (w_out), .in_valid(w_out_valid && c.huff), .in_last(w_out_last),
    .in_ready (enc_in_ready),
    .out_data (enc_data), .out_valid(enc_valid), .out_last(enc_last),
    .out_ready(io_out_ready)
  );

  always_comb begin
    if (c.huff) begin
      w_in        = dec_data;
      w_in_valid  = dec_valid;
      io_in_ready = dec_in_ready;
      w_out_ready = enc_in_ready;
      io_out_data = enc_data;
      io_out_valid= enc_valid;
      io_out_last = enc_last;
    end else begin
      w_in        = io_in_data;
      w_in_valid  = io_in_valid && busy && !c.out && st == S_GATHER;
      io_in_ready = busy && !c.out && w_in_ready;
      w_out_ready = io_out_ready;
      io_out_data = w_out;
      io_out_valid= w_out_valid;
      io_out_last = w_out_last;
    end
  end

  // ---------------- memory side ----------------
  logic w_take;   // a word is consumed from w_in this cycle
  assign w_in_ready = (st == S_GATHER) &&
                      (c.tgt == DT_DATA || c.tgt == DT_PROG || gw_gnt);
  assign w_take     = w_in_valid && w_in_ready;

  assign w_out       = vbuf[lane];
  assign w_out_valid = (st == S_SEND);
  assign w_out_last  = (st == S_SEND) && left == 17'd1;

  always_comb begin
    req_d       = '0;
    req_d.addr  = addr;
    req_d.vec   = 1'b1;
    req_d.mask  = '1;
    req_d.wdata = vbuf;
    if (st == S_VWR) begin req_d.en = 1'b1; req_d.we = 1'b1; end
    if (st == S_VRD) req_d.en = 1'b1;
    gw_img   = 1'b0;
    gw_flt   = 1'b0;
    gw_addr  = addr[13:4];
    gw_flags = '0;
    for (int i = 0; i < N; i++) gw_flags[i] = (vbuf[i] != '0);
    if (st == S_GWR) begin
      gw_img = !c.flag_flt;
      gw_flt =  c.flag_flt;
    end else if (st == S_GATHER && w_in_valid && (c.tgt == DT_IGRD || c.tgt == DT_FGRD)) begin
      gw_img   = c.tgt == DT_IGRD;
      gw_flt   = c.tgt == DT_FGRD;
      gw_addr  = addr[9:0];
      gw_flags = w_in;
    end
    pw_en   = st == S_GATHER && c.tgt == DT_PROG && w_in_valid;
    pw_addr = addr[PAW-1:0];
    pw_data = w_in;
  end

  assign busy = st != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; addr <= '0; left <= '0; lane <= '0; vbuf <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          c    <= cmd;
          addr <= cmd.addr;
          left <= cmd.nwords;
          lane <= '0;
          if (cmd.nwords == '0) done <= 1'b1;
          else st <= cmd.out ? S_VRD : S_GATHER;
        end
        S_GATHER: if (w_take) begin
          left <= left - 17'd1;
          if (c.tgt == DT_DATA) begin
            vbuf[lane] <= w_in;
            lane       <= lane + 4'd1;
            if (lane == 4'd15 || left == 17'd1) st <= S_VWR;
          end else begin
            addr <= addr + addr_t'(1);
            if (left == 17'd1) begin st <= S_IDLE; done <= 1'b1; end
          end
        end
        S_VWR: if (gnt_d) st <= c.gen_flags ? S_GWR : ((left == '0) ? S_IDLE : S_GATHER);
        S_GWR: if (gw_gnt) st <= ((left == '0) ? S_IDLE : S_GATHER);
        S_VRD: if (gnt_d) st <= S_VCAP;
        S_VCAP: begin vbuf <= rdata_d; lane <= '0; st <= S_SEND; end
        S_SEND: if (w_out_ready) begin
          lane <= lane + 4'd1;
          left <= left - 17'd1;
          if (left == 17'd1) st <= c.huff ? S_DRAIN : S_IDLE;
          else if (lane == 4'd15) begin addr <= addr + addr_t'(16); st <= S_VRD; end
        end
        S_DRAIN: if (io_out_valid && io_out_ready && io_out_last) begin
          st   <= S_IDLE;
          done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
      // end of a gathered vector: next vector or finished
      if ((st == S_VWR && gnt_d && !c.gen_flags) || (st == S_GWR && gw_gnt)) begin
        addr <= addr + addr_t'(16);
        lane <= '0;
        if (left == '0) done <= 1'b1;
      end
      if (st == S_SEND && w_out_ready && left == 17'd1 && !c.huff) done <= 1'b1;
    end
  end
endmodule

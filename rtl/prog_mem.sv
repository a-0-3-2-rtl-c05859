// prog_mem: the 16 kB program memory (8192 x 16 bit).
//
// Holds the controller's compiled program.  It is a single-port memory shared
// by two users: the DMA writes the program into it, and the controller fetches
// instruction words from it.  A DMA write has priority; a fetch in the same
// cycle is refused (fetch_gnt low) and must be retried.  Timing: a granted
// fetch returns its word on instr one clock later with instr_valid high.
// The capacity is the chip's; the 16-bit word width, the shared port and the
// priority are this implementation's choices (the instruction format is not
// published).
module prog_mem
  import cnn_pkg::*;
#(
  parameter int unsigned DEPTH = 8192
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  word_t                    wr_data,
  input  logic                     fetch_en,
  input  logic [$clog2(DEPTH)-1:0] fetch_addr,
  output logic                     fetch_gnt,
  output word_t                    instr,
  output logic                     instr_valid
);
  word_t mem [DEPTH];

  assign fetch_gnt = fetch_en && !wr_en;

  always_ff @(posedge clk) begin
    if (wr_en)          mem[wr_addr] <= wr_data;
    else if (fetch_en)  instr        <= mem[fetch_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) instr_valid <= 1'b0;
    else        instr_valid <= fetch_gnt;
  end
endmodule

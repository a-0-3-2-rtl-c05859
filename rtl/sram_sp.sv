// sram_sp: single-port SRAM macro, DEPTH x WIDTH (default 1024 x 16 bit = 2 kB).
//
// The data memory of the processor is built from 64 of these 2 kB macros and
// the guard-flag memory from two more.  One access per cycle: with ce high a
// write stores wdata at addr, a read returns mem[addr] on rdata one clock
// later.  With ce low the macro does nothing and rdata keeps its value, which
// is how a guarded (skipped) fetch saves the macro's read energy.  The macro
// size comes from the chip's memory organisation; read latency and the
// hold-on-idle behaviour are this implementation's choice.  Contents are not
// reset.
module sram_sp #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 16
) (
  input  logic                     clk,
  input  logic                     ce,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ce) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule

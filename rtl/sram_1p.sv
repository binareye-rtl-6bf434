// sram_1p: single-port synchronous SRAM with a bit-write mask.
//
// Stands for the SRAM macros of the chip (north and south weight SRAM, bias
// SRAM, FC SRAM and the banks of the activation SRAMs).  It is written as a
// plain array so that it simulates and synthesises anywhere; a tape-out would
// swap in the process's SRAM compiler macros.  Word widths and depths are set
// by the instantiating module; the paper gives only total capacities.
//
// Timing: one access per cycle when en is high.  A write (we=1) updates the
// bits selected by wmask; a read returns the word on rdata on the next cycle.
// rdata holds its value while en is low.
module sram_1p #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = 256,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wmask,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en && 32'(addr) < DEPTH) begin
      if (we) mem[addr] <= (mem[addr] & ~wmask) | (wdata & wmask);
      else    rdata     <= mem[addr];
    end
  end
endmodule

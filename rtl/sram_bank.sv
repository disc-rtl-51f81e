// sram_bank: one on-chip SRAM bank with an independent read port and write port.
//
// Every on-chip memory of the core (IMEM, each WMEM/OMEM/OPMEM bank, each mask-memory
// bank, the index memory) is built from this bank. What matters to the architecture is
// that every bank has its own address, so the N DPU-bank and SIMD-bank pairs can access
// different addresses in the same cycle. The two-port organisation, the per-bit write
// mask and the synchronous read are this design's choices; a compiled SRAM macro would
// replace the array in a real implementation.
//
// Timing: read data appears one cycle after `re` with `raddr`; a write with `we` updates
// the bits selected by `wmask` at the clock edge. A read of an address written in the
// same cycle returns the old contents.
module sram_bank #(
  parameter int DEPTH = 256,
  parameter int WIDTH = 32,
  parameter int AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [WIDTH-1:0] wmask
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= (mem[waddr] & ~wmask) | (wdata & wmask);
    if (re) rdata <= mem[raddr];
  end

  // Addresses beyond DEPTH are a controller bug.
  always_ff @(posedge clk) begin
    if (we) assert (int'(waddr) < DEPTH) else $error("sram_bank: write address %0d out of range", waddr);
    if (re) assert (int'(raddr) < DEPTH) else $error("sram_bank: read address %0d out of range", raddr);
  end
endmodule

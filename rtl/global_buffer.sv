// global_buffer: tile SRAM for activation and spike entries.
//
// Single-port synchronous memory of DEPTH words of W bits. A write stores
// wdata under the bit mask wmask (1 = write this bit) at the clock edge; a
// read returns the word on rdata one cycle after en with we low. The word
// width equals one activation entry so that a layer's spike output can be
// stored and later moved into a subarray FIFO unchanged. The sizes are
// this implementation's choice.
module global_buffer #(
  parameter int DEPTH = aster_pkg::GB_DEPTH,
  parameter int W     = aster_pkg::ENTRY_W
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [W-1:0]             wdata,
  input  logic [W-1:0]             wmask,
  output logic [W-1:0]             rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= (mem[addr] & ~wmask) | (wdata & wmask);
      else    rdata <= mem[addr];
    end
  end
endmodule

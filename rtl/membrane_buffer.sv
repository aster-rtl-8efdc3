// membrane_buffer: membrane potentials of the LIF neurons of one subarray.
//
// Holds one MEM_W-bit potential per column for each of SLOTS time-multiplexed
// neuron slots (for example token positions that reuse the same stationary
// weights). The read port is combinational on rd_slot; the write port stores
// a whole slot vector at the clock edge. clr writes zeros into slot
// clr_slot (the "clear membrane" path used at the start of an inference) and
// wins over a simultaneous write to the same slot. There is no reset of the
// contents: slots must be cleared before use.
module membrane_buffer #(
  parameter int COLS  = aster_pkg::COLS,
  parameter int SLOTS = aster_pkg::SLOTS,
  parameter int MEM_W = aster_pkg::MEM_W
) (
  input  logic                         clk,
  input  logic [$clog2(SLOTS)-1:0]     rd_slot,
  output logic [COLS-1:0][MEM_W-1:0]   rd_data,
  input  logic                         we,
  input  logic [$clog2(SLOTS)-1:0]     wr_slot,
  input  logic [COLS-1:0][MEM_W-1:0]   wr_data,
  input  logic                         clr,
  input  logic [$clog2(SLOTS)-1:0]     clr_slot
);
  logic [COLS-1:0][MEM_W-1:0] mem [SLOTS];

  assign rd_data = mem[rd_slot];

  always_ff @(posedge clk) begin
    if (we && !(clr && clr_slot == wr_slot)) mem[wr_slot] <= wr_data;
    if (clr) mem[clr_slot] <= '0;
  end
endmodule

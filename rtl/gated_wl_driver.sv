// gated_wl_driver: wordline enables of one subarray.
//
// A wordline is asserted only when three things hold: its mask bit is 1
// (non-zero input bit), the subarray is selected by the sub-array decoder
// (SS), and the scheduler's fire strobe is high. Unselected subarrays and
// zero input bits therefore never toggle a wordline. The output is the logic
// enable of each driver; the high-voltage level shifting of the real drivers
// is outside this model. active_cnt reports how many wordlines fire, which is
// the quantity the energy of a bit-plane scales with. Purely combinational.
module gated_wl_driver #(
  parameter int ROWS = aster_pkg::ROWS
) (
  input  logic [ROWS-1:0]           mask,
  input  logic                      ss,
  input  logic                      fire,
  output logic [ROWS-1:0]           wl,
  output logic [$clog2(ROWS+1)-1:0] active_cnt
);
  always_comb begin
    wl = mask & {ROWS{ss & fire}};
    active_cnt = '0;
    for (int r = 0; r < ROWS; r++) active_cnt += ($clog2(ROWS+1))'(wl[r]);
  end
endmodule

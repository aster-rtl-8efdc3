// sad: sub-array decoder of a tile.
//
// Turns a subarray address into the Subarray Select (SS) lines. Only the
// selected subarray may fire its wordlines, which is what confines activity
// (and the high-voltage wordline rails) to one subarray at a time. With
// `all` set every subarray is selected, used when the partial sums of several
// subarrays are added by the global accumulator. en low deselects all.
// Combinational.
module sad #(
  parameter int NUM_SUB = aster_pkg::NUM_SUB
) (
  input  logic                        en,
  input  logic                        all,
  input  logic [$clog2(NUM_SUB)-1:0]  addr,
  output logic [NUM_SUB-1:0]          ss
);
  always_comb begin
    ss = '0;
    if (en) begin
      if (all) ss = '1;
      else     ss[addr] = 1'b1;
    end
  end
endmodule

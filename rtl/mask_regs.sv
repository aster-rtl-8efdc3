// mask_regs: per-wordline mask registers of one subarray.
//
// On load, bit-plane `plane` of an activation entry is copied into the
// ROWS mask flip-flops: mask[r] = entry[r*ACT_BITS + plane]. A wordline whose
// mask bit is 0 is not driven for this bit-plane, so the work done follows the
// number of ones in the input rather than its width. clear zeroes all masks.
// The mask remains stable until the next load; it is used by the gated
// wordline drivers the cycle after load.
module mask_regs #(
  parameter int ROWS     = aster_pkg::ROWS,
  parameter int ACT_BITS = aster_pkg::ACT_BITS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        load,
  input  logic                        clear,
  input  logic [$clog2(ACT_BITS)-1:0] plane,
  input  logic [ROWS*ACT_BITS-1:0]    entry,
  output logic [ROWS-1:0]             mask
);
  logic [ROWS-1:0] plane_bits;

  always_comb begin
    for (int r = 0; r < ROWS; r++) plane_bits[r] = entry[r*ACT_BITS + int'(plane)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     mask <= '0;
    else if (clear) mask <= '0;
    else if (load)  mask <= plane_bits;
  end
endmodule

// global_accumulator: tile-level adder of subarray partial sums.
//
// When a layer's input rows are spread over several subarrays, each one
// produces a partial sum per column. On every in_valid (one bit-plane) the
// accumulator adds, lane by lane, the partial sums of the subarrays selected
// in `sel`, each shifted left by its bit weight `shift`:
//   acc[c] += sum_s sel[s] * (psum[s][c] << shift)
// clear zeroes all lanes (and takes priority). Lanes saturate at
// 2^GA_W-1. After the last bit-plane acc holds the full multi-bit
// matrix-vector product of the tile. Result registered, one cycle latency.
module global_accumulator #(
  parameter int NUM_SUB  = aster_pkg::NUM_SUB,
  parameter int COLS     = aster_pkg::COLS,
  parameter int ADC_BITS = aster_pkg::ADC_BITS,
  parameter int GA_W     = aster_pkg::GA_W
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic                                       clear,
  input  logic                                       in_valid,
  input  logic [NUM_SUB-1:0]                         sel,
  input  logic [1:0]                                 shift,
  input  logic [NUM_SUB-1:0][COLS-1:0][ADC_BITS-1:0] psum,
  output logic [COLS-1:0][GA_W-1:0]                  acc
);
  localparam int XW = GA_W + 1;
  localparam logic [GA_W-1:0] GA_MAX = '1;

  localparam int TW = ADC_BITS + $clog2(NUM_SUB) + 1;

  logic [COLS-1:0][GA_W-1:0] acc_nxt;

  // The shift is common to all selected subarrays, so each lane first adds
  // the selected partial sums and then shifts once.
  for (genvar c = 0; c < COLS; c++) begin : g_lane
    logic [TW-1:0] tot;
    logic [XW-1:0] s;

    always_comb begin
      tot = '0;
      for (int k = 0; k < NUM_SUB; k++)
        tot = tot + TW'(psum[k][c] & {ADC_BITS{sel[k]}});
    end

    assign s          = XW'(acc[c]) + (XW'(tot) << shift);
    assign acc_nxt[c] = (s > XW'(GA_MAX)) ? GA_MAX : s[GA_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (clear) acc <= '0;
    else if (in_valid) acc <= acc_nxt;
  end
endmodule

// peripheral_readout: column multiplexers and converters of one subarray.
//
// COLS bitlines are read by COLS/ADC_SHARE converters; converter a serves the
// ADC_SHARE adjacent bitlines a*ADC_SHARE .. a*ADC_SHARE+ADC_SHARE-1. In mux
// step s (0..ADC_SHARE-1) every converter looks at its bitline number s and,
// when sample is high, its code is stored as psum[a*ADC_SHARE + s]. Stepping
// s through all values over ADC_SHARE cycles fills the whole partial-sum
// vector, which then stays registered until overwritten. The 16 converters
// sharing 8 columns each follow the design; the step order is this
// implementation's.
module peripheral_readout #(
  parameter int COLS      = aster_pkg::COLS,
  parameter int ADC_SHARE = aster_pkg::ADC_SHARE,
  parameter int SUM_W     = $clog2(aster_pkg::ROWS + 1),
  parameter int ADC_BITS  = aster_pkg::ADC_BITS
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [COLS-1:0][SUM_W-1:0]         col_sum,
  input  logic [$clog2(ADC_SHARE)-1:0]       step,
  input  logic                               sample,
  output logic [COLS-1:0][ADC_BITS-1:0]      psum
);
  localparam int NADC = COLS / ADC_SHARE;

  logic [NADC-1:0][SUM_W-1:0]    mux_out;
  logic [NADC-1:0][ADC_BITS-1:0] code;

  for (genvar a = 0; a < NADC; a++) begin : g_adc
    assign mux_out[a] = col_sum[a*ADC_SHARE + int'(step)];
    sense_adc #(.IN_W(SUM_W), .ADC_BITS(ADC_BITS)) u_adc (
      .din (mux_out[a]),
      .code(code[a])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) psum <= '0;
    else if (sample) begin
      for (int a = 0; a < NADC; a++) psum[a*ADC_SHARE + int'(step)] <= code[a];
    end
  end
endmodule

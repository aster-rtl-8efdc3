// sense_adc: behavioural model of one column converter (sense amplifiers
// against reference currents followed by an encoder).
//
// This is a behavioural model: the real part is analog. It converts the
// bitline current of the column selected by the column multiplexer, given
// here as an integer cell count `din`, into an ADC_BITS code. The transfer
// function is ideal: code = din, saturating at 2^ADC_BITS-1. The converter
// resolution is an assumption. Combinational.
module sense_adc #(
  parameter int IN_W     = $clog2(aster_pkg::ROWS + 1),
  parameter int ADC_BITS = aster_pkg::ADC_BITS
) (
  input  logic [IN_W-1:0]     din,
  output logic [ADC_BITS-1:0] code
);
  localparam int W = (IN_W > ADC_BITS) ? IN_W : ADC_BITS;
  localparam logic [W-1:0] MAXC = W'((64'(1) << ADC_BITS) - 1);

  always_comb begin
    if (W'(din) > MAXC) code = MAXC[ADC_BITS-1:0];
    else                code = ADC_BITS'(din);
  end
endmodule

// max_pool: element-wise maximum over a sequence of entries.
//
// The entry is split into W/EW elements of EW bits. start clears the running
// result to zero; every in_valid folds the input in, element by element:
// res[e] = max(res[e], din[e]). With the default EW = 1 (binary spikes) the
// maximum is a bitwise OR, so pooling a window of spike maps gives a spike
// wherever any input in the window spiked. The window is the number of
// entries presented between start and the read of res.
module max_pool #(
  parameter int W  = aster_pkg::ENTRY_W,
  parameter int EW = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         in_valid,
  input  logic [W-1:0] din,
  output logic [W-1:0] res
);
  localparam int NE = W / EW;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) res <= '0;
    else if (start) res <= '0;
    else if (in_valid) begin
      for (int e = 0; e < NE; e++)
        if (din[e*EW +: EW] > res[e*EW +: EW]) res[e*EW +: EW] <= din[e*EW +: EW];
    end
  end
endmodule

// rram_crossbar: behavioural model of the RRAM processing-in-memory array.
//
// This is a behavioural model, not synthesizable circuit design: the real
// part is an analog crossbar of 1T1R cells in which every asserted wordline
// lets its cells add current onto the bitlines. Here each cell is one bit
// (conducting or not) and the bitline current is modelled as the integer
// number of conducting cells on asserted wordlines, so col_sum[c] =
// sum_r wl[r] & cells[r][c]. The cell precision is an assumption.
//
// Programming: wr_en writes wr_data into row wr_row at the clock edge (the
// logical effect of the bitline/source-line drivers). Reading is
// combinational in wl. The array is held column by column (one ROWS-bit
// vector per bitline) so that each bitline sum is a separate small block.
module rram_crossbar #(
  parameter int ROWS  = aster_pkg::ROWS,
  parameter int COLS  = aster_pkg::COLS,
  parameter int SUM_W = $clog2(ROWS + 1)
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [$clog2(ROWS)-1:0]      wr_row,
  input  logic [COLS-1:0]              wr_data,
  input  logic [ROWS-1:0]              wl,
  output logic [COLS-1:0][SUM_W-1:0]   col_sum
);
  logic [ROWS-1:0] row_sel;
  assign row_sel = ROWS'(1) << wr_row;

  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic [ROWS-1:0] cells;

    always_ff @(posedge clk) begin
      if (wr_en) cells <= (cells & ~row_sel) | ({ROWS{wr_data[c]}} & row_sel);
    end

    assign col_sum[c] = SUM_W'($countones(wl & cells));
  end
endmodule

// tb_rram_crossbar: programs random binary cells and compares every bitline
// sum with a count made by the testbench for random wordline patterns.
module tb_rram_crossbar;
  localparam int ROWS = 128, COLS = 128, SW = 8;
  logic clk = 0, wr_en = 0;
  logic [6:0] wr_row;
  logic [COLS-1:0] wr_data;
  logic [ROWS-1:0] wl;
  logic [COLS-1:0][SW-1:0] col_sum;
  logic [COLS-1:0] w [ROWS];
  int checks = 0, failures = 0;

  rram_crossbar #(.ROWS(ROWS), .COLS(COLS), .SUM_W(SW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wl = '0;
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      for (int q = 0; q < COLS/32; q++) w[r][q*32 +: 32] = $urandom;
      wr_row = 7'(r); wr_data = w[r]; wr_en = 1; @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < 20; i++) begin
      for (int q = 0; q < ROWS/32; q++) wl[q*32 +: 32] = (i == 0) ? '1 : $urandom;
      #1;
      for (int c = 0; c < COLS; c++) begin
        int n;
        n = 0;
        for (int r = 0; r < ROWS; r++) n += int'(wl[r] & w[r][c]);
        checks++; if (int'(col_sum[c]) != n) begin failures++; $display("FAIL col %0d %0d/%0d", c, col_sum[c], n); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

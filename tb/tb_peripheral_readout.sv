// tb_peripheral_readout: steps the column multiplexers through all inputs
// and checks that every column's code lands in its own psum lane, that lanes
// not sampled keep their value and that large sums saturate.
module tb_peripheral_readout;
  localparam int COLS = 128, SH = 8, SW = 9, AB = 8;
  logic clk = 0, rst_n = 0, sample = 0;
  logic [COLS-1:0][SW-1:0] col_sum;
  logic [2:0] step;
  logic [COLS-1:0][AB-1:0] psum, old;
  int checks = 0, failures = 0;

  peripheral_readout #(.COLS(COLS), .ADC_SHARE(SH), .SUM_W(SW), .ADC_BITS(AB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    step = 0;
    for (int c = 0; c < COLS; c++) col_sum[c] = SW'($urandom % 300);
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int s = 0; s < SH; s++) begin
      step = 3'(s); sample = 1; @(negedge clk);
    end
    sample = 0;
    for (int c = 0; c < COLS; c++) begin
      int e;
      e = (int'(col_sum[c]) > 255) ? 255 : int'(col_sum[c]);
      checks++; if (int'(psum[c]) != e) begin failures++; $display("FAIL col %0d", c); end
    end
    // a single step only updates its lanes
    old = psum;
    for (int c = 0; c < COLS; c++) col_sum[c] = SW'(c);
    step = 3; sample = 1; @(negedge clk); sample = 0;
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if ((c % SH) == 3) begin if (int'(psum[c]) != c) failures++; end
      else if (psum[c] != old[c]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

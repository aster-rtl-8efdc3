// tb_global_accumulator: random partial sums of four subarrays with random
// selects and bit weights, compared lane by lane with a model; clear and
// saturation.
module tb_global_accumulator;
  localparam int NS = 4, COLS = 16, AB = 8, GW = 16;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic [NS-1:0] sel;
  logic [1:0] shift;
  logic [NS-1:0][COLS-1:0][AB-1:0] psum;
  logic [COLS-1:0][GW-1:0] acc;
  int model [COLS];
  int checks = 0, failures = 0;

  global_accumulator #(.NUM_SUB(NS), .COLS(COLS), .ADC_BITS(AB), .GA_W(GW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    clear = 1; @(negedge clk); clear = 0;
    for (int c = 0; c < COLS; c++) model[c] = 0;
    for (int i = 0; i < 300; i++) begin
      if (i % 50 == 0) begin
        clear = 1; @(negedge clk); clear = 0;
        for (int c = 0; c < COLS; c++) model[c] = 0;
      end
      in_valid = 1'($urandom); sel = 4'($urandom); shift = 2'($urandom);
      for (int s = 0; s < NS; s++) for (int c = 0; c < COLS; c++) psum[s][c] = AB'($urandom);
      if (in_valid)
        for (int c = 0; c < COLS; c++) begin
          for (int s = 0; s < NS; s++) if (sel[s]) model[c] += int'(psum[s][c]) << shift;
          if (model[c] > 65535) model[c] = 65535;
        end
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        checks++; if (int'(acc[c]) != model[c]) begin failures++; $display("FAIL lane %0d", c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

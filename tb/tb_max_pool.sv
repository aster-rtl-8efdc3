// tb_max_pool: bitwise OR for spike maps (EW = 1) and element maximum for
// 4-bit elements over random windows.
module tb_max_pool;
  localparam int W = 64;
  logic clk = 0, rst_n = 0, start = 0, in_valid = 0;
  logic [W-1:0] din, res1, res4, m1, m4;
  int checks = 0, failures = 0;

  max_pool #(.W(W), .EW(1)) dut1 (.clk, .rst_n, .start, .in_valid, .din, .res(res1));
  max_pool #(.W(W), .EW(4)) dut4 (.clk, .rst_n, .start, .in_valid, .din, .res(res4));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int win = 0; win < 30; win++) begin
      int n;
      n = 1 + $urandom % 9;
      start = 1; @(negedge clk); start = 0;
      m1 = '0; m4 = '0;
      for (int i = 0; i < n; i++) begin
        din = {$urandom, $urandom} & {$urandom, $urandom}; in_valid = 1;
        m1 |= din;
        for (int e = 0; e < W/4; e++) if (din[e*4 +: 4] > m4[e*4 +: 4]) m4[e*4 +: 4] = din[e*4 +: 4];
        @(negedge clk);
      end
      in_valid = 0;
      checks++; if (res1 !== m1) begin failures++; $display("FAIL or"); end
      checks++; if (res4 !== m4) begin failures++; $display("FAIL max"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

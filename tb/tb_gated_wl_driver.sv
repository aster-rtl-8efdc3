// tb_gated_wl_driver: a wordline fires only for mask=1 with the subarray
// selected and the fire strobe high; the active count equals the number of
// fired wordlines.
module tb_gated_wl_driver;
  localparam int ROWS = 128;
  logic [ROWS-1:0] mask, wl;
  logic ss, fire;
  logic [7:0] active_cnt;
  int checks = 0, failures = 0;

  gated_wl_driver #(.ROWS(ROWS)) dut (.*);

  initial begin
    for (int i = 0; i < 200; i++) begin
      int n;
      for (int w = 0; w < 4; w++) mask[w*32 +: 32] = $urandom & $urandom;
      ss = 1'($urandom); fire = 1'($urandom);
      #1;
      n = 0;
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (wl[r] !== (mask[r] && ss && fire)) failures++;
        n += int'(mask[r] && ss && fire);
      end
      checks++; if (int'(active_cnt) != n) begin failures++; $display("FAIL count %0d/%0d", active_cnt, n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sdsa_unit: random binary Q, K, V for N tokens; the channel mask must
// be (sum_n Q[n][d] & K[n][d]) >= vth and every output V[n] & mask, one cycle
// after its V input, with the number of ones reported.
module tb_sdsa_unit;
  localparam int D = 128;
  logic clk = 0, rst_n = 0, clr = 0, qk_valid = 0, v_valid = 0, out_valid;
  logic [D-1:0] q, k, v, mask, out, em;
  logic [7:0] vth;
  logic [7:0] out_ones;
  int cnt [D];
  int checks = 0, failures = 0;

  sdsa_unit #(.D(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int rep = 0; rep < 10; rep++) begin
      int ntok;
      ntok = 4 + $urandom % 60;
      vth = 8'(1 + $urandom % 8);
      clr = 1; @(negedge clk); clr = 0;
      for (int d = 0; d < D; d++) cnt[d] = 0;
      for (int n = 0; n < ntok; n++) begin
        for (int w = 0; w < D/32; w++) begin q[w*32 +: 32] = $urandom & $urandom; k[w*32 +: 32] = $urandom & $urandom; end
        for (int d = 0; d < D; d++) cnt[d] += int'(q[d] & k[d]);
        qk_valid = 1; @(negedge clk); qk_valid = 0;
      end
      for (int d = 0; d < D; d++) em[d] = cnt[d] >= int'(vth);
      checks++; if (mask !== em) begin failures++; $display("FAIL mask"); end
      for (int n = 0; n < ntok; n++) begin
        for (int w = 0; w < D/32; w++) v[w*32 +: 32] = $urandom;
        v_valid = 1; @(negedge clk); v_valid = 0;
        checks++; if (!out_valid || out !== (v & em)) begin failures++; $display("FAIL out"); end
        checks++; if (int'(out_ones) != $countones(v & em)) begin failures++; $display("FAIL ones"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

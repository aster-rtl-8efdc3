// tb_attn_skip_unit: feeds per-layer spike observations with different
// firing rates and checks that decide marks exactly the layers whose rate
// ones/bits is below tau, leaves unobserved layers alone, and that skip bits
// can be written directly.
module tb_attn_skip_unit;
  localparam int L = 8;
  logic clk = 0, rst_n = 0, prof_clr = 0, obs_valid = 0, decide = 0, set = 0;
  logic [2:0] obs_layer;
  logic [7:0] obs_ones, obs_bits;
  logic [15:0] tau;
  logic [L-1:0] set_mask, skip, exp_s;
  longint ones [L], bits [L];
  int checks = 0, failures = 0;

  attn_skip_unit #(.LAYERS(L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int rep = 0; rep < 5; rep++) begin
      set = 1; set_mask = '0; prof_clr = 1; @(negedge clk); set = 0; prof_clr = 0;
      for (int l = 0; l < L; l++) begin ones[l] = 0; bits[l] = 0; end
      for (int i = 0; i < 400; i++) begin
        obs_layer = 3'($urandom % (L - 1));          // layer 7 never observed
        obs_bits = 8'd128;
        obs_ones = 8'($urandom % (4 + 20 * int'(obs_layer)));
        ones[obs_layer] += obs_ones; bits[obs_layer] += obs_bits;
        obs_valid = 1; @(negedge clk);
      end
      obs_valid = 0;
      tau = 16'(3000 + $urandom % 20000);
      decide = 1; @(negedge clk); decide = 0;
      for (int l = 0; l < L; l++) exp_s[l] = (bits[l] != 0) && ((ones[l] << 16) < longint'(tau) * bits[l]);
      checks++; if (skip !== exp_s) begin failures++; $display("FAIL skip %b exp %b", skip, exp_s); end
      checks++; if (skip == 0 || skip == 8'h7f) begin failures++; $display("FAIL degenerate tau"); end
    end
    set = 1; set_mask = 8'hA5; @(negedge clk); set = 0;
    checks++; if (skip !== 8'hA5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

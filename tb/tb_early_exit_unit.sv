// tb_early_exit_unit: feeds per-timestep logits for several samples and
// checks the accumulated prediction, the timestep count, the done latency
// (2*classes+2 cycles) and the exit decision against a real-valued model of
// the maximum (base-2) softmax probability of the time-averaged logits.
module tb_early_exit_unit;
  localparam int C = 16, GW = 16;
  logic clk = 0, rst_n = 0, clr = 0, logit_valid = 0;
  logic [15:0] beta;
  logic [7:0] num_classes, t_max, pred, tcount;
  logic [C-1:0][GW-1:0] logits;
  logic busy, done, exit_now, confident;
  longint sums [C];
  int checks = 0, failures = 0, exits = 0, confs = 0;

  early_exit_unit #(.CLASSES(C), .GA_W(GW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    num_classes = 8'd11; t_max = 8'd16;
    for (int smp = 0; smp < 40; smp++) begin
      int hot;
      hot = $urandom % 11;
      beta = 16'(32768 + $urandom % 30000);
      clr = 1; @(negedge clk); clr = 0;
      for (int c = 0; c < C; c++) sums[c] = 0;
      for (int t = 1; t <= 16; t++) begin
        int lat, best, mx;
        real s, p;
        for (int c = 0; c < C; c++) begin
          logits[c] = GW'((c == hot) ? 4 + $urandom % 6 : $urandom % 5);
          sums[c] += logits[c];
        end
        logit_valid = 1; @(negedge clk); logit_valid = 0; lat = 1;
        while (!done && lat < 100) begin @(negedge clk); lat++; end
        checks++; if (lat != 2 * 11 + 2) begin failures++; $display("FAIL latency %0d", lat); end
        best = 0; mx = 0;
        for (int c = 0; c < 11; c++) if (sums[c] > mx) begin mx = int'(sums[c]); best = c; end
        s = 0.0;
        for (int c = 0; c < 11; c++) begin
          int e;
          e = (mx - int'(sums[c])) / t;
          if (e <= 16) s += 2.0 ** (-e);
        end
        p = 1.0 / s;
        checks++; if (int'(pred) != best) begin failures++; $display("FAIL pred %0d %0d", pred, best); end
        checks++; if (int'(tcount) != t) begin failures++; $display("FAIL t"); end
        checks++;
        if (confident != (p > real'(beta) / 65536.0)) begin failures++; $display("FAIL conf p=%f beta=%0d", p, beta); end
        checks++;
        if (exit_now != (confident || t == 16)) begin failures++; $display("FAIL exit"); end
        if (confident) confs++;
        if (exit_now) begin exits++; break; end
      end
    end
    checks++; if (confs == 0 || exits != 40) begin failures++; $display("FAIL exits %0d confs %0d", exits, confs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

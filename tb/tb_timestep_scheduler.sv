// tb_timestep_scheduler: for each precision checks the bit-plane sequence
// (plane, shift, fire_en, timestep), the number of mask loads, wordline fire
// cycles and accumulate strobes, the single pop, and the start-to-done
// latency: ADC_SHARE+2 cycles per non-empty bit-plane, 2 per empty one, plus
// DRAIN+1 (43 cycles when no plane is empty). Empty planes are chosen at
// random and must be skipped (no fire cycles, psum_zero set).
module tb_timestep_scheduler;
  import aster_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, plane_zero, psum_zero;
  logic [3:0] zmask;
  prec_e prec;
  logic busy, mask_load, fire, sample, acc_valid, fire_en, pop, done;
  logic [1:0] plane, shift, tstep;
  logic [2:0] step;
  int checks = 0, failures = 0;

  timestep_scheduler dut (.*);
  assign plane_zero = zmask[plane];
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    prec_e ps[3] = '{PREC_1, PREC_2, PREC_4};
    repeat (2) @(posedge clk); rst_n = 1;
    zmask = '0;
    for (int it = 0; it < 24; it++) begin
      int n, loads, fires, accs, pops, cyc, nb, i, nz;
      i = it % 3;
      zmask = (it < 3) ? 4'b0000 : (it < 6) ? 4'b1111 : 4'($urandom);
      nz = 4 - $countones(zmask);
      nb = (ps[i] == PREC_1) ? 1 : (ps[i] == PREC_2) ? 2 : 4;
      @(negedge clk); prec = ps[i]; start = 1;
      @(negedge clk); start = 0; prec = PREC_1;
      loads = 0; fires = 0; accs = 0; pops = 0; cyc = 1;
      while (!done) begin
        if (mask_load) loads++;
        if (fire) fires++;
        if (pop) pops++;
        if (acc_valid) begin
          chk(int'(shift) == accs % nb, "shift");
          chk(fire_en == ((accs % nb) == nb - 1), "fire_en");
          chk(int'(tstep) == accs / nb, "timestep");
          chk(int'(plane) == accs, "plane");
          chk(psum_zero == zmask[accs], "empty plane flagged");
          accs++;
        end
        @(negedge clk); cyc++;
        if (cyc > 200) break;
      end
      if (pop) pops++;
      chk(loads == 4, "4 mask loads");
      chk(fires == 8 * nz, "8 fire cycles per non-empty plane");
      chk(accs == 4, "4 accumulates");
      chk(pops == 1, "one pop");
      chk(cyc == 10 * nz + 2 * (4 - nz) + 3, $sformatf("latency %0d", cyc));
      @(negedge clk);
      chk(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

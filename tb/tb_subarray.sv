// tb_subarray: full-size subarray (128 x 128). Programs random binary
// weights, then
//   1. a 4-bit run in partial-sum mode: every bit-plane's partial sums must
//      equal the testbench's count of (input bit AND weight) per column;
//   2. a 4-bit LIF run: one spike vector, O = sum_b psum_b << b >= vth;
//   3. a 1-bit LIF run with loopback: four timesteps with membrane carried
//      and hard reset, packed into an entry that re-enters the FIFO;
//   4. a run on the looped-back entry, checked against the same model;
//   5. a run with the subarray not selected: no wordline may fire.
// The start-to-done latency must be 10 cycles per bit-plane holding a one,
// 2 per empty plane, plus 4 (44 when no plane is empty); one run uses an
// entry with empty planes.
module tb_subarray;
  import aster_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ss, wr_en = 0, push = 0, start = 0, lif_en = 0, loopback = 0, clr_mem = 0;
  logic [6:0] wr_row;
  logic [COLS-1:0] wr_data;
  logic [ENTRY_W-1:0] push_data, entry;
  logic fifo_full, fifo_empty, busy, done, psum_valid, entry_valid;
  prec_e prec;
  logic [5:0] slot, clr_slot;
  logic [MEM_W-1:0] vth;
  logic [COLS-1:0][ADC_BITS-1:0] psum;
  logic [1:0] psum_shift;
  logic [7:0] wl_active;
  logic [COLS-1:0] w [ROWS];
  int mem_model [COLS];
  int checks = 0, failures = 0, nps, lat, wl_seen;
  logic [ENTRY_W-1:0] cur, got_entry;
  logic got;

  subarray dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int colsum(logic [ENTRY_W-1:0] e, int b, int c);
    int n = 0;
    for (int r = 0; r < ROWS; r++) n += int'(e[r*ACT_BITS + b] & w[r][c]);
    return n;
  endfunction

  // psum checker during runs
  always @(negedge clk) if (rst_n && psum_valid) begin
    for (int c = 0; c < COLS; c++)
      chk(int'(psum[c]) == (ss ? colsum(cur, nps, c) : 0), "psum");
    nps++;
  end
  always @(negedge clk) if (rst_n && wl_active != 0) wl_seen++;
  always @(negedge clk) if (rst_n && entry_valid) begin got = 1; got_entry = entry; end

  task automatic run(input prec_e p, input bit lif, input bit lb);
    nps = 0; got = 0; lat = 0;
    cur = dut.u_fifo.dout;
    prec = p; lif_en = lif; loopback = lb; start = 1;
    @(negedge clk); start = 0; lat = 1;
    while (!done && lat < 200) begin @(negedge clk); lat++; end
    begin
      int exp_lat;
      exp_lat = 4;
      for (int b = 0; b < ACT_BITS; b++) begin
        bit any;
        any = 0;
        for (int r = 0; r < ROWS; r++) any |= cur[r*ACT_BITS + b];
        exp_lat += any ? 10 : 2;
      end
      chk(lat == exp_lat, $sformatf("latency %0d expected %0d", lat, exp_lat));
    end
    chk(nps == 4, "four bit-planes");
    @(negedge clk);
  endtask

  function automatic logic [ENTRY_W-1:0] model_lif(logic [ENTRY_W-1:0] e, int nb);
    logic [ENTRY_W-1:0] out = '0;
    int steps = 4 / nb;
    for (int t = 0; t < steps; t++)
      for (int c = 0; c < COLS; c++) begin
        int o = mem_model[c];
        for (int b = 0; b < nb; b++) o += colsum(e, t*nb + b, c) << b;
        if (o >= int'(vth)) begin out[c*ACT_BITS + t] = 1; mem_model[c] = 0; end
        else mem_model[c] = o;
      end
    return out;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [ENTRY_W-1:0] e, exp_e;
    ss = 1; slot = 5; vth = 16'd150; prec = PREC_4; clr_slot = 5;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      for (int q = 0; q < COLS/32; q++) w[r][q*32 +: 32] = $urandom & $urandom;
      wr_row = 7'(r); wr_data = w[r]; wr_en = 1; @(negedge clk);
    end
    wr_en = 0;
    clr_mem = 1; @(negedge clk); clr_mem = 0;
    for (int c = 0; c < COLS; c++) mem_model[c] = 0;

    // 1. partial-sum mode
    for (int q = 0; q < ENTRY_W/32; q++) e[q*32 +: 32] = $urandom;
    push_data = e; push = 1; @(negedge clk); push = 0;
    run(PREC_4, 0, 0);
    chk(!got, "no spikes in psum mode");
    chk(fifo_empty, "entry popped");

    // 2. 4-bit LIF
    for (int q = 0; q < ENTRY_W/32; q++) e[q*32 +: 32] = $urandom & $urandom;
    push_data = e; push = 1; @(negedge clk); push = 0;
    vth = 16'd400;
    exp_e = model_lif(e, 4);
    run(PREC_4, 1, 0);
    chk(got && got_entry == exp_e, "4-bit spikes");

    // 3. 1-bit LIF with loopback
    vth = 16'd20;
    for (int q = 0; q < ENTRY_W/32; q++) e[q*32 +: 32] = $urandom & $urandom & $urandom;
    push_data = e; push = 1; @(negedge clk); push = 0;
    exp_e = model_lif(e, 1);
    run(PREC_1, 1, 1);
    chk(got && got_entry == exp_e, "1-bit spikes over 4 timesteps");
    chk(!fifo_empty && dut.u_fifo.dout == exp_e, "spikes looped back into FIFO");

    // 4. run on the looped-back entry
    e = dut.u_fifo.dout;
    exp_e = model_lif(e, 1);
    run(PREC_1, 1, 0);
    chk(got && got_entry == exp_e, "second layer from loopback");

    // 5. not selected: no wordline fires, sums are zero
    for (int q = 0; q < ENTRY_W/32; q++) e[q*32 +: 32] = $urandom;
    push_data = e; push = 1; @(negedge clk); push = 0;
    ss = 0; wl_seen = 0;
    run(PREC_2, 0, 0);
    chk(wl_seen == 0, "no wordline without SS");

    // 6. entry whose planes 1 and 3 are empty: those planes are skipped
    ss = 1;
    for (int q = 0; q < ENTRY_W/32; q++) e[q*32 +: 32] = $urandom & 32'h5555_5555;
    push_data = e; push = 1; @(negedge clk); push = 0;
    exp_e = model_lif(e, 1);
    run(PREC_1, 1, 0);
    chk(got && got_entry == exp_e, "spikes with empty planes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

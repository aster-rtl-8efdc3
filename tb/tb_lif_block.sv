// tb_lif_block: drives random bit-plane partial sums into four neuron slots,
// back to back and with gaps, and compares every emitted spike vector with a
// sequential model of  O_tmp = O + (psum << shift);  on the last bit:
// spike = O_tmp >= vth, O = spike ? 0 : O_tmp.  Spikes must appear two cycles
// after the last bit-plane of a timestep.
module tb_lif_block;
  localparam int COLS = 8, SLOTS = 4, MW = 16, AB = 8;
  logic clk = 0, rst_n = 0, acc_valid = 0, fire_en = 0, clr = 0;
  logic [COLS-1:0][AB-1:0] psum;
  logic [1:0] shift;
  logic [1:0] slot, clr_slot;
  logic [MW-1:0] vth;
  logic spike_valid;
  logic [COLS-1:0] spikes;
  int model [SLOTS][COLS];
  logic [COLS-1:0] expq[$];
  int expt[$];
  int checks = 0, failures = 0, cyc = 0, fired = 0;

  lif_block #(.COLS(COLS), .SLOTS(SLOTS), .MEM_W(MW), .ADC_BITS(AB)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  always @(negedge clk) if (rst_n && spike_valid) begin
    checks++;
    if (expq.size() == 0) begin failures++; $display("FAIL unexpected spikes"); end
    else begin
      logic [COLS-1:0] e;
      int t;
      e = expq.pop_front();
      t = expt.pop_front();
      if (spikes !== e) begin failures++; $display("FAIL spikes %b exp %b", spikes, e); end
      checks++; if (cyc != t + 2) begin failures++; $display("FAIL timing %0d vs %0d", cyc, t); end
      fired += $countones(spikes);
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    vth = 16'd300;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int s = 0; s < SLOTS; s++) begin
      clr = 1; clr_slot = 2'(s); @(negedge clk);
      for (int c = 0; c < COLS; c++) model[s][c] = 0;
    end
    clr = 0;
    for (int i = 0; i < 400; i++) begin
      int nb;
      nb = (i % 3 == 0) ? 4 : (i % 3 == 1) ? 1 : 2;
      slot = 2'($urandom);
      for (int b = 0; b < nb; b++) begin
        logic [COLS-1:0] e;
        for (int c = 0; c < COLS; c++) psum[c] = AB'($urandom % 60);
        shift = 2'(b); fire_en = (b == nb - 1); acc_valid = 1;
        for (int c = 0; c < COLS; c++) begin
          int t;
          t = model[slot][c] + (int'(psum[c]) << b);
          if (t > 65535) t = 65535;
          e[c] = fire_en && (t >= int'(vth));
          model[slot][c] = e[c] ? 0 : t;
        end
        if (fire_en) begin expq.push_back(e); expt.push_back(cyc); end
        @(negedge clk);
        if ($urandom % 4 == 0) begin acc_valid = 0; @(negedge clk); end
      end
    end
    acc_valid = 0;
    repeat (4) @(negedge clk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL missing spikes"); end
    checks++; if (fired == 0) begin failures++; $display("FAIL nothing fired"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

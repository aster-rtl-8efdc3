// tb_spike_buffer: four spike vectors make one entry (vector k in bit k of
// each row group); a flush emits a partial entry, including a vector that
// arrives with the flush; a flush of an empty buffer emits nothing.
module tb_spike_buffer;
  localparam int ROWS = 16, AB = 4;
  logic clk = 0, rst_n = 0, in_valid = 0, flush = 0, out_valid;
  logic [ROWS-1:0] spikes;
  logic [ROWS*AB-1:0] entry, exp_e;
  int checks = 0, failures = 0, outs = 0;

  spike_buffer #(.ROWS(ROWS), .ACT_BITS(AB)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && out_valid) outs++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send(input int k);
    spikes = ROWS'($urandom);
    for (int r = 0; r < ROWS; r++) exp_e[r*AB + k] = spikes[r];
    in_valid = 1; @(negedge clk); in_valid = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int rep = 0; rep < 10; rep++) begin
      exp_e = '0;
      for (int k = 0; k < AB; k++) begin
        checks++; if (out_valid) failures++;
        send(k);
      end
      checks++; if (!out_valid || entry != exp_e) begin failures++; $display("FAIL full entry"); end
      @(negedge clk);
    end
    exp_e = '0; send(0);
    spikes = ROWS'($urandom);
    for (int r = 0; r < ROWS; r++) exp_e[r*AB + 1] = spikes[r];
    in_valid = 1; flush = 1; @(negedge clk); in_valid = 0; flush = 0;
    checks++; if (!out_valid || entry != exp_e) begin failures++; $display("FAIL flush"); end
    @(negedge clk);
    flush = 1; @(negedge clk); flush = 0;
    checks++; if (out_valid) begin failures++; $display("FAIL empty flush"); end
    checks++; if (outs != 11) begin failures++; $display("FAIL count %0d", outs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

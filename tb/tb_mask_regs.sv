// tb_mask_regs: loads every bit-plane of random entries and checks that
// mask[r] is bit `plane` of row r's group; checks hold and clear.
module tb_mask_regs;
  localparam int ROWS = 128, AB = 4;
  logic clk = 0, rst_n = 0, load = 0, clear = 0;
  logic [1:0] plane;
  logic [ROWS*AB-1:0] entry;
  logic [ROWS-1:0] mask, exp_m;
  int checks = 0, failures = 0;

  mask_regs #(.ROWS(ROWS), .ACT_BITS(AB)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    entry = '0; plane = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    checks++; if (mask != 0) failures++;
    for (int i = 0; i < 40; i++) begin
      for (int w = 0; w < ROWS*AB/32; w++) entry[w*32 +: 32] = $urandom;
      plane = 2'($urandom); load = 1;
      for (int r = 0; r < ROWS; r++) exp_m[r] = entry[r*AB + plane];
      @(negedge clk); load = 0;
      checks++; if (mask !== exp_m) begin failures++; $display("FAIL plane %0d", plane); end
      entry = ~entry; @(negedge clk);
      checks++; if (mask !== exp_m) begin failures++; $display("FAIL hold"); end
    end
    clear = 1; @(negedge clk); clear = 0;
    checks++; if (mask != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

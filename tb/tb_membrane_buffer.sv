// tb_membrane_buffer: random slot writes and reads against a model, and
// clearing of a slot (also when written in the same cycle).
module tb_membrane_buffer;
  localparam int COLS = 8, SLOTS = 64, MW = 16;
  logic clk = 0, we = 0, clr = 0;
  logic [5:0] rd_slot, wr_slot, clr_slot;
  logic [COLS-1:0][MW-1:0] rd_data, wr_data;
  logic [COLS-1:0][MW-1:0] model [SLOTS];
  int checks = 0, failures = 0;

  membrane_buffer #(.COLS(COLS), .SLOTS(SLOTS), .MEM_W(MW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge clk);
    for (int s = 0; s < SLOTS; s++) begin
      clr = 1; clr_slot = 6'(s); model[s] = '0; @(negedge clk);
    end
    clr = 0;
    for (int i = 0; i < 500; i++) begin
      we = 1'($urandom); wr_slot = 6'($urandom);
      for (int c = 0; c < COLS; c++) wr_data[c] = MW'($urandom);
      clr = ($urandom % 8) == 0; clr_slot = ($urandom % 2) ? wr_slot : 6'($urandom);
      rd_slot = 6'($urandom);
      #1; checks++; if (rd_data != model[rd_slot]) begin failures++; $display("FAIL read"); end
      if (we) model[wr_slot] = wr_data;
      if (clr) model[clr_slot] = '0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

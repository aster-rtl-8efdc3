// tb_act_fifo: checks ordering, full/empty flags, simultaneous push and pop
// and the occupancy count of the activation FIFO (8 rows x 4 bits, depth 4).
module tb_act_fifo;
  localparam int ROWS = 8, AB = 4, DEPTH = 4, W = ROWS*AB;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [W-1:0] din, dout;
  logic full, empty;
  logic [2:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  act_fifo #(.ROWS(ROWS), .ACT_BITS(AB), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    din = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    chk(empty && !full && count == 0, "empty after reset");
    for (int i = 0; i < DEPTH; i++) begin
      din = W'($urandom); push = 1; model.push_back(din); @(negedge clk);
    end
    push = 0;
    chk(full && count == DEPTH, "full after 4 pushes");
    // push while full and popping at the same time
    din = W'($urandom); push = 1; pop = 1;
    chk(dout == model[0], "head before pop");
    void'(model.pop_front()); model.push_back(din);
    @(negedge clk); push = 0; pop = 0;
    chk(full && count == DEPTH, "still full after push+pop");
    for (int i = 0; i < 200; i++) begin
      push = ($urandom % 2) && !full; pop = ($urandom % 2) && !empty;
      din = W'($urandom);
      if (pop) begin chk(dout == model[0], "head data"); void'(model.pop_front()); end
      if (push) model.push_back(din);
      @(negedge clk);
      chk(count == model.size(), "count");
      chk(empty == (model.size() == 0), "empty flag");
    end
    push = 0; pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

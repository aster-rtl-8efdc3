// tb_global_buffer: random masked writes and reads against a model, with
// the one-cycle read latency.
module tb_global_buffer;
  localparam int DEPTH = 256, W = 64;
  logic clk = 0, en = 0, we = 0;
  logic [7:0] addr;
  logic [W-1:0] wdata, wmask, rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  global_buffer #(.DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      en = 1; we = 1; addr = 8'(a); wdata = {$urandom, $urandom}; wmask = '1;
      model[a] = wdata; @(negedge clk);
    end
    for (int i = 0; i < 2000; i++) begin
      en = 1; we = 1'($urandom); addr = 8'($urandom);
      wdata = {$urandom, $urandom}; wmask = {$urandom, $urandom};
      if (we) begin
        model[addr] = (model[addr] & ~wmask) | (wdata & wmask);
        @(negedge clk);
      end else begin
        logic [W-1:0] e;
        e = model[addr];
        @(negedge clk);
        checks++; if (rdata !== e) begin failures++; $display("FAIL read"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

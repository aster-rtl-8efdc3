// tb_sad: one-hot decode, broadcast and disable of the sub-array decoder.
module tb_sad;
  logic en, all;
  logic [1:0] addr;
  logic [3:0] ss;
  int checks = 0, failures = 0;
  sad #(.NUM_SUB(4)) dut (.*);
  initial begin
    for (int i = 0; i < 16; i++) begin
      {en, all, addr} = 4'(i); #1;
      checks++;
      if (ss !== (!en ? 4'b0 : all ? 4'hf : (4'b1 << addr))) begin failures++; $display("FAIL %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

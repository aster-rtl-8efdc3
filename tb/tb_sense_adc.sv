// tb_sense_adc: ideal conversion below full scale, saturation above it.
module tb_sense_adc;
  logic [9:0] din;
  logic [5:0] code;
  int checks = 0, failures = 0;
  sense_adc #(.IN_W(10), .ADC_BITS(6)) dut (.*);
  initial begin
    for (int v = 0; v < 1024; v++) begin
      din = 10'(v); #1;
      checks++;
      if (int'(code) != ((v > 63) ? 63 : v)) begin failures++; $display("FAIL %0d -> %0d", v, code); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_adc: the ADC model passes values up to 63 and clips larger ones.
module tb_adc;
  int checks = 0, failures = 0;
  logic [8:0] ain; logic [5:0] code;
  adc #(.ADC_BITS(6)) dut (.*);
  initial begin
    for (int v = 0; v < 512; v++) begin
      ain = 9'(v); #1;
      checks++;
      if (int'(code) != (v > 63 ? 63 : v)) begin failures++; $display("FAIL: %0d -> %0d", v, code); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

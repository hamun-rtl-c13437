// tb_sfu: random sums through ReLU on/off, shifts 0..12 and pooling windows
// of 1..4; the reference applies ReLU, arithmetic shift, saturation to
// int8 and max over the window.
module tb_sfu;
  import hamun_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic relu_en, in_valid, out_valid; logic [4:0] shift; logic [3:0] pool_len;
  psum_t in_data [LINE_BYTES]; logic [7:0] out_data [LINE_BYTES];
  int mx [LINE_BYTES];
  sfu dut (.*);
  function automatic int q8(longint v, bit relu, int sh);
    if (relu && v < 0) v = 0;
    v = v >>> sh;
    if (v > 127) v = 127; else if (v < -128) v = -128;
    return int'(v);
  endfunction
  initial begin
    relu_en = 0; shift = 0; pool_len = 1; in_valid = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      relu_en = n[0]; shift = 5'($urandom_range(12)); pool_len = 4'($urandom_range(4, 1));
      for (int p = 0; p < int'(pool_len); p++) begin
        @(negedge clk); in_valid = 1;
        for (int l = 0; l < LINE_BYTES; l++) begin
          int v;
          in_data[l] = psum_t'($signed($urandom_range(200000)) - 100000);
          v = q8(longint'(in_data[l]), relu_en, int'(shift));
          mx[l] = (p == 0 || v > mx[l]) ? v : mx[l];
        end
        @(negedge clk); in_valid = 0;
        checks++; if (out_valid != (p == int'(pool_len) - 1)) begin failures++; $display("FAIL: out_valid"); end
      end
      for (int l = 0; l < LINE_BYTES; l++) begin
        checks++;
        if (int'($signed(out_data[l])) != mx[l]) begin failures++; $display("FAIL: lane %0d %0d/%0d", l, $signed(out_data[l]), mx[l]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

// tb_acc_unit: sums of 1 to 5 random partial-sum vectors, checked against
// a reference, with out_valid only after the last one.
module tb_acc_unit;
  import hamun_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_first, in_last, out_valid;
  psum_t in_data [LINE_BYTES]; psum_t out_data [LINE_BYTES];
  longint s [LINE_BYTES];
  acc_unit dut (.*);
  initial begin
    in_valid = 0; in_first = 0; in_last = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 30; n++) begin
      int len; len = $urandom_range(5, 1);
      for (int l = 0; l < LINE_BYTES; l++) s[l] = 0;
      for (int p = 0; p < len; p++) begin
        @(negedge clk);
        in_valid = 1; in_first = (p == 0); in_last = (p == len - 1);
        for (int l = 0; l < LINE_BYTES; l++) begin
          in_data[l] = psum_t'($signed($urandom_range(2000000)) - 1000000);
          s[l] += longint'(in_data[l]);
        end
        @(negedge clk); in_valid = 0;
        checks++; if (out_valid != (p == len - 1)) begin failures++; $display("FAIL: out_valid"); end
      end
      for (int l = 0; l < LINE_BYTES; l++) begin
        checks++; if (longint'(out_data[l]) != s[l]) begin failures++; $display("FAIL: lane %0d", l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

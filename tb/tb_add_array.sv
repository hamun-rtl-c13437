// tb_add_array: random partial sums and row enables; each output must be
// the sum over enabled PE rows, one cycle after in_valid.
module tb_add_array;
  import hamun_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid; logic [PE_M-1:0] row_en;
  psum_t in [PE_M][PE_N][W_PER_ROW];
  psum_t out [PE_N][W_PER_ROW];
  add_array dut (.*);
  initial begin
    in_valid = 0; row_en = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      @(negedge clk);
      row_en = 6'($urandom);
      for (int i = 0; i < PE_M; i++) for (int j = 0; j < PE_N; j++) for (int k = 0; k < W_PER_ROW; k++)
        in[i][j][k] = psum_t'($signed($urandom_range(200000)) - 100000);
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++; if (!out_valid) begin failures++; $display("FAIL: out_valid"); end
      for (int j = 0; j < PE_N; j++) for (int k = 0; k < W_PER_ROW; k++) begin
        automatic longint s = 0;
        for (int i = 0; i < PE_M; i++) if (row_en[i]) s += longint'(in[i][j][k]);
        checks++; if (longint'(out[j][k]) != s) begin failures++; $display("FAIL: %0d %0d", j, k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

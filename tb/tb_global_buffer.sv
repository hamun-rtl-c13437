// tb_global_buffer: plain lines through the normal group and a 5 x 32 key
// matrix through the transposing group, read back with the group select;
// the transposed read must return K^T in order.
module tb_global_buffer;
  import hamun_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic tcfg_valid, wr_valid, wr_sel, wr_ready, rd_valid, rd_sel, rd_data_valid;
  logic [11:0] tcfg_rows, tcfg_cols;
  logic [19:0] wr_addr, rd_addr;
  logic [LINE_W-1:0] wr_data, rd_data;
  logic [31:0] conflict_cycles;
  global_buffer dut (.*);
  logic [LINE_W-1:0] vals [32];
  logic [7:0] K [160];
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    tcfg_valid = 0; wr_valid = 0; wr_sel = 0; rd_valid = 0; rd_sel = 0;
    tcfg_rows = 0; tcfg_cols = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 32; n++) begin
      vals[n] = {4{$urandom}};
      @(negedge clk); wr_valid = 1; wr_sel = 0; wr_addr = 20'(n * 1000); wr_data = vals[n];
    end
    @(negedge clk); wr_valid = 0; tcfg_valid = 1; tcfg_rows = 5; tcfg_cols = 32;
    @(negedge clk); tcfg_valid = 0;
    for (int a = 0; a < 160; a++) K[a] = 8'($urandom);
    for (int t = 0; t < 10; t++) begin
      @(negedge clk); while (!wr_ready) @(negedge clk);
      wr_valid = 1; wr_sel = 1; wr_addr = 0;
      for (int b = 0; b < 16; b++) wr_data[8*b +: 8] = K[16 * t + b];
    end
    @(negedge clk); wr_valid = 0;
    for (int n = 0; n < 32; n++) begin
      @(negedge clk); rd_valid = 1; rd_sel = 0; rd_addr = 20'(n * 1000);
      @(negedge clk); rd_valid = 0;
      check(rd_data_valid && rd_data == vals[n], $sformatf("normal line %0d", n));
    end
    for (int e = 0; e < 10; e++) begin
      @(negedge clk); rd_valid = 1; rd_sel = 1; rd_addr = 20'(e);
      @(negedge clk); rd_valid = 0;
      for (int b = 0; b < 16; b++) begin
        int i, r, c;
        i = 16 * e + b; c = i / 5; r = i % 5;   // K^T[c][r] = K[r][c]
        check(rd_data_valid && rd_data[8*b +: 8] == K[r * 32 + c], $sformatf("transposed %0d", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

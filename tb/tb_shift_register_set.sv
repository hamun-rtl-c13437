// tb_shift_register_set: sends 8 lines of random activations and checks the
// 8 emitted bit planes (bit b of activation r in plane b, row r), their
// order, their timing (one per cycle right after the 8th line) and that
// in_ready is low while emitting.
module tb_shift_register_set;
  import hamun_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, in_ready, out_valid; logic [LINE_W-1:0] in_line;
  logic [2:0] out_idx; logic [XB_ROWS-1:0] out_plane;
  logic [7:0] act [XB_ROWS];
  shift_register_set dut (.*);
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    in_valid = 0; in_line = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int v = 0; v < 4; v++) begin
      for (int r = 0; r < XB_ROWS; r++) act[r] = 8'($urandom);
      for (int l = 0; l < 8; l++) begin
        @(negedge clk);
        check(in_ready, "ready while collecting");
        in_valid = 1;
        for (int b = 0; b < 16; b++) in_line[8*b +: 8] = act[16*l + b];
      end
      @(negedge clk); in_valid = 0;
      for (int b = 0; b < 8; b++) begin
        check(out_valid && !in_ready && out_idx == 3'(b), $sformatf("plane %0d timing", b));
        for (int r = 0; r < XB_ROWS; r++)
          check(out_plane[r] == act[r][b], $sformatf("plane %0d row %0d", b, r));
        @(negedge clk);
      end
      check(!out_valid && in_ready, "done after 8 planes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

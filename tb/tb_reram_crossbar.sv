// tb_reram_crossbar: checks the crossbar model: pulses move levels one
// step in the polarity given, SL-disabled columns keep their level, the
// sample-and-hold returns sum_i in_i * level_i per column, and a cell stops
// responding once its endurance is used up.
module tb_reram_crossbar;
  import hamun_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [6:0] wr_row; logic wr_pulse, wr_dec, sh_sample;
  logic [XB_COLS-1:0] sl_en; logic [XB_ROWS-1:0] wl_in;
  logic [CELL_BITS-1:0] vfy_level [XB_COLS];
  logic [8:0] col_out [XB_COLS];
  int lv [XB_ROWS][XB_COLS];
  logic [15:0] seed = 16'd3;
  reram_crossbar #(.ENDURANCE_MEAN(64'd20)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic pulse(input int r, input bit dec, input logic [XB_COLS-1:0] en);
    @(negedge clk); wr_row = 7'(r); wr_dec = dec; sl_en = en; wr_pulse = 1;
    @(negedge clk); wr_pulse = 0;
    for (int c = 0; c < XB_COLS; c++)
      if (en[c]) lv[r][c] = dec ? (lv[r][c] > 0 ? lv[r][c] - 1 : 0) : (lv[r][c] < 3 ? lv[r][c] + 1 : 3);
  endtask

  initial begin
    wr_row = 0; wr_pulse = 0; wr_dec = 0; sh_sample = 0; sl_en = '0; wl_in = '0;
    for (int r = 0; r < XB_ROWS; r++) for (int c = 0; c < XB_COLS; c++) lv[r][c] = 0;
    // random programming of 10 rows with up to 3 pulses per polarity
    for (int r = 0; r < 10; r++)
      for (int n = 0; n < 4; n++) pulse(r, n == 3, {$urandom, $urandom, $urandom, $urandom});
    for (int r = 0; r < 10; r++) begin
      @(negedge clk); wr_row = 7'(r); #1;
      for (int c = 0; c < XB_COLS; c++) check(vfy_level[c] == 2'(lv[r][c]), "verify read");
    end
    for (int n = 0; n < 5; n++) begin
      @(negedge clk); wl_in = '0; wl_in[9:0] = 10'($urandom); sh_sample = 1;
      @(negedge clk); sh_sample = 0;
      for (int c = 0; c < XB_COLS; c++) begin
        automatic int s = 0;
        for (int r = 0; r < 10; r++) if (wl_in[r]) s += lv[r][c];
        check(int'(col_out[c]) == s, $sformatf("column sum %0d", c));
      end
    end
    // wear out cell (20, 0): endurance 20 +- 6, so 40 pulses must exhaust it
    for (int n = 0; n < 40; n++) begin
      @(negedge clk); wr_row = 20; wr_dec = n[0]; sl_en = '0; sl_en[0] = 1; wr_pulse = 1;
      @(negedge clk); wr_pulse = 0;
    end
    begin
      logic [1:0] stuck;
      stuck = vfy_level[0];
      @(negedge clk); wr_dec = stuck == 3; wr_pulse = 1; @(negedge clk); wr_pulse = 0;
      check(vfy_level[0] == stuck, "worn-out cell stays stuck");
      check(dut.wear[20][0] == dut.row_limit[0], "wear count stops at endurance");
      check(dut.row_limit[0] >= 14 && dut.row_limit[0] <= 26, "endurance within spread");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

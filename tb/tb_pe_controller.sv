// tb_pe_controller: the PE controller against behavioural APU and buffer
// responders written here. The buffer model returns, one cycle after a
// read, a line that encodes its PE row and address, so every writing
// register load can be checked for the right line pair. The APU model
// answers a row write with wr_done WCYC cycles after wr_start, accepts a
// bit plane every 12 cycles and returns res_valid 12 cycles after the
// last plane, as the real APU does. Checked: SET_MASK targets one APU with
// the command's mask; WRITE_ROW loads the 4 APUs of the chosen PE row with
// the right line pairs and starts only that row; COMPUTE hands out planes
// 0..7 in order from lines buf_addr+b only to the rows in row_en, ends
// with one ADD array pulse at out_addr; the command latencies (2 + 96 + 3
// cycles for COMPUTE, WCYC + 11 for WRITE_ROW, 0 for SET_MASK); halt
// holds cmd_ready low; inf_tick advances the wear-leveling counter.
module tb_pe_controller;
  import hamun_pkg::*;
  localparam int WCYC = 40;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0; always @(posedge clk) cyc <= cyc + 1;

  logic halt, inf_tick, cmd_valid, cmd_ready, buf_re, add_valid;
  pe_cmd_t cmd;
  logic [1:0] bit_rot; logic [6:0] row_start, buf_raddr, wr_row;
  logic [LINE_W-1:0] buf_rdata [PE_M];
  logic [W_PER_ROW*W_BITS-1:0] wreg_data;
  logic wreg_load [PE_M][PE_N], mask_load [PE_M][PE_N];
  logic [XB_COLS-1:0] mask_data;
  logic [PE_M-1:0] wr_start, wr_done, plane_valid, plane_ready, res_valid, row_en;
  logic [2:0] plane_idx; logic [3:0] out_addr;

  pe_controller dut (.*);

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [LINE_W-1:0] line_of(input int r, input int a);
    return {16'(r), 16'(a), 32'hC0DE_0000 | 32'(r * 128 + a), 64'(a * 7 + r)};
  endfunction

  // buffer: registered read
  always @(posedge clk)
    for (int r = 0; r < PE_M; r++)
      if (buf_re) buf_rdata[r] <= line_of(r, int'(buf_raddr));

  // APU responders
  int wr_cnt [PE_M]; int busy [PE_M]; int nplanes [PE_M]; int res_cnt [PE_M];
  always @(posedge clk) begin
    for (int r = 0; r < PE_M; r++) begin
      wr_done[r] <= 1'b0; res_valid[r] <= 1'b0;
      if (wr_start[r]) wr_cnt[r] <= WCYC;
      else if (wr_cnt[r] > 0) begin
        wr_cnt[r] <= wr_cnt[r] - 1;
        if (wr_cnt[r] == 1) wr_done[r] <= 1'b1;
      end
      if (plane_valid[r]) begin
        busy[r] <= 12; nplanes[r] <= nplanes[r] + 1;
        if (plane_idx == 3'd7) res_cnt[r] <= 12;
      end else if (busy[r] > 0) busy[r] <= busy[r] - 1;
      if (res_cnt[r] > 0) begin
        res_cnt[r] <= res_cnt[r] - 1;
        if (res_cnt[r] == 1) res_valid[r] <= 1'b1;
      end
    end
  end
  always_comb for (int r = 0; r < PE_M; r++) plane_ready[r] = (busy[r] <= 1);

  // monitors
  int nload [PE_M][PE_N]; int nmask [PE_M][PE_N]; int nstart [PE_M]; int nadd;
  int exp_row, exp_base; logic [2:0] exp_b [PE_M];
  logic [PE_M-1:0] exp_en; logic [XB_COLS-1:0] exp_mask;
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < PE_M; r++) begin
      for (int j = 0; j < PE_N; j++) begin
        if (wreg_load[r][j]) begin
          nload[r][j]++;
          check(r == exp_row, $sformatf("wreg_load row %0d exp %0d", r, exp_row));
          check(wreg_data == {line_of(r, exp_base + 2 * j + 1), line_of(r, exp_base + 2 * j)},
                $sformatf("wreg_data APU(%0d,%0d)", r, j));
        end
        if (mask_load[r][j]) begin
          nmask[r][j]++;
          check(mask_data == exp_mask, "mask_data");
        end
      end
      if (wr_start[r]) nstart[r]++;
      if (plane_valid[r]) begin
        check(exp_en[r], $sformatf("plane to row %0d not enabled", r));
        check(plane_idx == exp_b[r], $sformatf("plane idx %0d exp %0d", plane_idx, exp_b[r]));
        check(buf_rdata[r] == line_of(r, exp_base + int'(plane_idx)),
              $sformatf("plane line row %0d idx %0d", r, plane_idx));
        exp_b[r] <= exp_b[r] + 3'd1;
      end
    end
    if (add_valid) nadd++;
  end

  task automatic issue(input pe_cmd_t c, output int lat);
    int t0;
    @(negedge clk); while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1; t0 = cyc;
    @(negedge clk); cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
    lat = cyc - t0 - 1;
  endtask

  initial begin
    int lat;
    pe_cmd_t c;
    halt = 0; inf_tick = 0; cmd_valid = 0; cmd = '0;
    for (int r = 0; r < PE_M; r++) begin wr_cnt[r] = 0; busy[r] = 0; nplanes[r] = 0; res_cnt[r] = 0; end
    exp_row = -1; exp_base = 0; exp_en = '0; exp_mask = '0; nadd = 0;
    for (int r = 0; r < PE_M; r++) exp_b[r] = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    for (int it = 0; it < 30; it++) begin
      // SET_MASK
      c = '0; c.op = OP_SET_MASK; c.pe_row = 3'($urandom_range(0, PE_M - 1));
      c.pe_col = 2'($urandom_range(0, PE_N - 1));
      c.mask = {$urandom, $urandom, $urandom, $urandom};
      exp_mask = c.mask;
      for (int r = 0; r < PE_M; r++) for (int j = 0; j < PE_N; j++) nmask[r][j] = 0;
      issue(c, lat);
      check(lat == 0, $sformatf("SET_MASK latency %0d", lat));
      for (int r = 0; r < PE_M; r++) for (int j = 0; j < PE_N; j++)
        check(nmask[r][j] == ((r == c.pe_row && j == c.pe_col) ? 1 : 0), "mask_load target");

      // WRITE_ROW
      c = '0; c.op = OP_WRITE_ROW; c.pe_row = 3'($urandom_range(0, PE_M - 1));
      c.xb_row = 7'($urandom); c.buf_addr = 7'($urandom_range(0, 80));
      exp_row = c.pe_row; exp_base = c.buf_addr;
      for (int r = 0; r < PE_M; r++) begin
        nstart[r] = 0; for (int j = 0; j < PE_N; j++) nload[r][j] = 0;
      end
      issue(c, lat);
      check(lat == 2 * PE_N + 3 + WCYC, $sformatf("WRITE_ROW latency %0d", lat));
      check(wr_row == c.xb_row, "wr_row");
      for (int r = 0; r < PE_M; r++) begin
        check(nstart[r] == ((r == c.pe_row) ? 1 : 0), $sformatf("wr_start row %0d", r));
        for (int j = 0; j < PE_N; j++)
          check(nload[r][j] == ((r == c.pe_row) ? 1 : 0), $sformatf("wreg_load count %0d,%0d", r, j));
      end
      exp_row = -1;

      // COMPUTE
      c = '0; c.op = OP_COMPUTE; c.row_en = 6'($urandom_range(1, 63));
      c.buf_addr = 7'($urandom_range(0, 88)); c.out_addr = 4'($urandom);
      exp_base = c.buf_addr; exp_en = c.row_en; nadd = 0;
      for (int r = 0; r < PE_M; r++) begin nplanes[r] = 0; exp_b[r] = '0; end
      issue(c, lat);
      check(lat == 2 + XB_CMP_CYC + 3, $sformatf("COMPUTE latency %0d", lat));
      check(nadd == 1, $sformatf("add pulses %0d", nadd));
      check(row_en == c.row_en && out_addr == c.out_addr, "row_en/out_addr");
      for (int r = 0; r < PE_M; r++)
        check(nplanes[r] == (c.row_en[r] ? 8 : 0), $sformatf("planes row %0d = %0d", r, nplanes[r]));
      exp_en = '0;
    end

    // halt
    @(negedge clk); halt = 1;
    @(negedge clk); check(!cmd_ready, "halt blocks commands");
    halt = 0;
    @(negedge clk); check(cmd_ready, "resume");

    // wear-leveling counter
    for (int k = 0; k < 300; k++) begin
      check(bit_rot == 2'(k) && row_start == 7'(k), $sformatf("counter %0d: rot %0d start %0d", k, bit_rot, row_start));
      @(negedge clk); inf_tick = 1; @(negedge clk); inf_tick = 0;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_apu: self-checking test of the APU.
// A reference model in the testbench computes the expected dot products
// (signed 8-bit activations times unsigned 8-bit weights, with the 6-bit ADC
// clipping applied per column and bit plane) and the expected physical cell
// contents under bit rotation and row shifting. Checked: results of
// several dot products, the 96-cycle computation latency, the row write
// latency, both wear-leveling maps, masking of retired columns, ADC
// saturation, fault reports of a second APU whose cells wear out fast, and
// one row write of a third APU at the default parameters (6000 cycles).
module tb_apu;
  import hamun_pkg::*;
  localparam int WCYC = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---------------- DUT 0: long endurance ----------------
  logic [1:0] bit_rot; logic [6:0] row_start;
  logic wreg_load, mask_load, wr_start, wr_busy, wr_done, fault_valid;
  logic [W_PER_ROW*W_BITS-1:0] wreg_data;
  logic [XB_COLS-1:0] mask_data;
  logic [6:0] wr_row;
  fault_t fault;
  logic plane_valid, plane_ready, res_valid;
  logic [XB_ROWS-1:0] plane_bits;
  logic [2:0] plane_idx;
  psum_t res [W_PER_ROW];

  logic [15:0] seed = 16'd1;
  apu #(.ROW_WR_CYC_P(WCYC)) dut (.*);

  // ---------------- DUT 1: short endurance ----------------
  logic f_wreg_load, f_wr_start, f_wr_busy, f_wr_done, f_fault_valid, f_plane_ready, f_res_valid;
  fault_t f_fault;
  psum_t f_res [W_PER_ROW];
  apu #(.ROW_WR_CYC_P(WCYC), .ENDURANCE_MEAN(64'd10)) dutf (
    .clk, .rst_n, .seed(16'd7), .bit_rot(2'd0), .row_start(7'd0),
    .wreg_load(f_wreg_load), .wreg_data, .mask_load(1'b0), .mask_data('0),
    .wr_start(f_wr_start), .wr_row(7'd0), .wr_busy(f_wr_busy), .wr_done(f_wr_done),
    .fault_valid(f_fault_valid), .fault(f_fault),
    .plane_valid(1'b0), .plane_bits('0), .plane_idx(3'd0), .plane_ready(f_plane_ready),
    .res_valid(f_res_valid), .res(f_res));

  // ---------------- DUT 2: default parameters (6000-cycle row write) ----
  logic d_wreg_load, d_wr_start, d_wr_busy, d_wr_done, d_fault_valid, d_plane_ready, d_res_valid;
  fault_t d_fault;
  psum_t d_res [W_PER_ROW];
  apu dutd (
    .clk, .rst_n, .seed(16'd9), .bit_rot(2'd2), .row_start(7'd5),
    .wreg_load(d_wreg_load), .wreg_data, .mask_load(1'b0), .mask_data('0),
    .wr_start(d_wr_start), .wr_row(7'd9), .wr_busy(d_wr_busy), .wr_done(d_wr_done),
    .fault_valid(d_fault_valid), .fault(d_fault),
    .plane_valid(1'b0), .plane_bits('0), .plane_idx(3'd0), .plane_ready(d_plane_ready),
    .res_valid(d_res_valid), .res(d_res));

  // reference state
  logic [7:0]        W [XB_ROWS][W_PER_ROW];
  logic signed [7:0] A [XB_ROWS];
  logic [XB_COLS-1:0] msk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write_row(input int l, input int rot, input int start);
    int t0, t1;
    @(negedge clk);
    for (int k = 0; k < W_PER_ROW; k++) wreg_data[8*k +: 8] = W[l][k];
    wreg_load = 1; bit_rot = 2'(rot); row_start = 7'(start);
    @(negedge clk); wreg_load = 0;
    wr_row = 7'(l); wr_start = 1; t0 = cyc;
    @(negedge clk); wr_start = 0;
    while (!wr_done) @(negedge clk);
    t1 = cyc;
    check(t1 - t0 - 1 == WCYC, $sformatf("row write latency %0d", t1 - t0 - 1));
  endtask

  // expected result with per-column, per-bit ADC clipping at 63
  function automatic longint expect_k(int k, int rot, int start);
    longint tot = 0;
    for (int b = 0; b < ACT_BITS; b++)
      for (int q = 0; q < CELLS_PER_W; q++) begin
        int c, s, colsum;
        c = 4 * k + q;
        s = (q + rot) % 4;
        colsum = 0;
        for (int l = 0; l < XB_ROWS; l++)
          if (A[l][b]) colsum += int'(W[l][k][2*s +: 2]);
        if (colsum > 63) colsum = 63;
        if (!msk[c]) begin
          if (b == 7) tot -= longint'(colsum) << (2 * s + b);
          else        tot += longint'(colsum) << (2 * s + b);
        end
      end
    return tot;
  endfunction

  task automatic compute(input int rot, input int start, input string tag);
    int t0, t1;
    for (int b = 0; b < ACT_BITS; b++) begin
      @(negedge clk);
      while (!plane_ready) @(negedge clk);
      for (int l = 0; l < XB_ROWS; l++) plane_bits[l] = A[l][b];
      plane_idx = 3'(b); plane_valid = 1;
      if (b == 0) t0 = cyc;
    end
    @(negedge clk); plane_valid = 0;
    while (!res_valid) @(negedge clk);
    t1 = cyc;
    // t0 is sampled before the accepting edge, t1 after the result edge
    check(t1 - t0 - 1 == XB_CMP_CYC, $sformatf("%s: compute latency %0d", tag, t1 - t0 - 1));
    for (int k = 0; k < W_PER_ROW; k++)
      check(longint'(res[k]) == expect_k(k, rot, start),
            $sformatf("%s: res[%0d]=%0d exp %0d", tag, k, res[k], expect_k(k, rot, start)));
  endtask

  task automatic check_layout(input int rows, input int rot, input int start);
    for (int l = 0; l < rows; l++)
      for (int c = 0; c < XB_COLS; c++) begin
        int s; logic [1:0] e;
        s = ((c % 4) + rot) % 4;
        e = W[l][c / 4][2*s +: 2];
        if (!msk[c])
          check(dut.u_xb.level[(l + start) % XB_ROWS][c] == e,
                $sformatf("layout row %0d col %0d", l, c));
      end
  endtask

  initial begin
    int nrows;
    bit seen_fault;
    bit_rot = 0; row_start = 0; wreg_load = 0; mask_load = 0; wr_start = 0; wr_row = 0;
    wreg_data = '0; mask_data = '0; plane_valid = 0; plane_bits = '0; plane_idx = 0;
    f_wreg_load = 0; f_wr_start = 0; d_wreg_load = 0; d_wr_start = 0;
    msk = '0;
    for (int l = 0; l < XB_ROWS; l++) begin
      A[l] = 0;
      for (int k = 0; k < W_PER_ROW; k++) W[l][k] = 0;
    end
    repeat (3) @(negedge clk); rst_n = 1;

    // 1) plain mapping, 6 rows used (sums stay under the ADC range)
    nrows = 6;
    for (int l = 0; l < nrows; l++) begin
      for (int k = 0; k < W_PER_ROW; k++) W[l][k] = 8'($urandom);
      write_row(l, 0, 0);
    end
    check_layout(nrows, 0, 0);
    for (int n = 0; n < 3; n++) begin
      for (int l = 0; l < nrows; l++) A[l] = 8'($urandom);
      compute(0, 0, "plain");
    end

    // 2) next inference: bit rotation 1, rows shifted by 5 (wear leveling)
    for (int l = 0; l < nrows; l++) begin
      for (int k = 0; k < W_PER_ROW; k++) W[l][k] = 8'($urandom);
      write_row(l, 1, 5);
    end
    check_layout(nrows, 1, 5);
    for (int n = 0; n < 2; n++) begin
      for (int l = 0; l < nrows; l++) A[l] = 8'($urandom);
      compute(1, 5, "wl");
    end

    // 3) retire weight 3 and column 70: mask them, rewrite, compute
    msk = '0; msk[15:12] = 4'hF; msk[70] = 1'b1;
    @(negedge clk); mask_data = msk; mask_load = 1; @(negedge clk); mask_load = 0;
    for (int l = 0; l < nrows; l++) begin
      for (int k = 0; k < W_PER_ROW; k++) W[l][k] = 8'($urandom);
      write_row(l, 3, 126);
    end
    check_layout(nrows, 3, 126);
    for (int l = 0; l < nrows; l++) A[l] = 8'($urandom);
    compute(3, 126, "mask");
    check(res[3] == 0, "masked weight gives 0");

    // 4) ADC saturation: 40 rows of weight 0xFF, all activations -1
    msk = '0;
    @(negedge clk); mask_data = msk; mask_load = 1; @(negedge clk); mask_load = 0;
    for (int l = 0; l < 40; l++) begin
      for (int k = 0; k < W_PER_ROW; k++) W[l][k] = 8'hFF;
      write_row(l, 0, 0);
    end
    for (int l = 0; l < 40; l++) A[l] = -8'sd1;
    compute(0, 0, "saturate");

    // 5) wear-out: alternate 0x00 / 0xFF into row 0 of the short-lived APU
    seen_fault = 0;
    for (int n = 0; n < 12; n++) begin
      @(negedge clk);
      for (int k = 0; k < W_PER_ROW; k++) wreg_data[8*k +: 8] = (n % 2) ? 8'hFF : 8'h00;
      f_wreg_load = 1; @(negedge clk); f_wreg_load = 0; f_wr_start = 1;
      @(negedge clk); f_wr_start = 0;
      while (!f_wr_done) @(negedge clk);
      begin
        logic [XB_COLS-1:0] exp_bad;
        for (int c = 0; c < XB_COLS; c++)
          exp_bad[c] = dutf.u_xb.level[0][c] != ((n % 2) ? 2'd3 : 2'd0);
        check(f_fault_valid == (exp_bad != 0), $sformatf("fault flag write %0d", n));
        if (f_fault_valid) begin
          seen_fault = 1;
          check(f_fault.cols == exp_bad && f_fault.row == 0, $sformatf("fault cols write %0d", n));
        end
      end
    end
    check(seen_fault, "wear-out fault was detected");

    // full-length row write at the default parameters: rotation 2, start 5
    begin
      logic [7:0] wd [W_PER_ROW];
      int t0, t1;
      @(negedge clk);
      for (int k = 0; k < W_PER_ROW; k++) begin wd[k] = 8'($urandom); wreg_data[8*k +: 8] = wd[k]; end
      d_wreg_load = 1;
      @(negedge clk); d_wreg_load = 0; d_wr_start = 1; t0 = cyc;
      @(negedge clk); d_wr_start = 0;
      while (!d_wr_done) @(negedge clk);
      t1 = cyc;
      check(t1 - t0 - 1 == ROW_WR_CYC, $sformatf("default row write latency %0d", t1 - t0 - 1));
      check(!d_fault_valid, "no fault at full endurance");
      for (int c = 0; c < XB_COLS; c++)
        check(dutd.u_xb.level[14][c] == wd[c / 4][2 * (((c % 4) + 2) % 4) +: 2],
              $sformatf("default write cell %0d", c));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_hamun_chip: end-to-end test of the chip with 2 PEs, 60-cycle row
// writes, a small global buffer and a low cell endurance (mean 10 pulses,
// so that wear-out happens within the test). Everything goes through the
// chip's ports:
//  1. the transposing bank group is set to a 4 x 32 key matrix, the matrix
//     is written row by row from outside and read back; every entry must
//     hold K^T (4 rows is even, so the swapping register must also take
//     extra cycles: conflict cycles > 0);
//  2. weights of 4 crossbar rows are sent to PE row 0 of both PEs from
//     main memory and written with WRITE_ROW (latency 2*4 + 3 + row write);
//     one weight of PE 1 is retired with a column mask first;
//  3. activations go to PE 0 from main memory and to PE 1 from the global
//     buffer (both network sources), COMPUTE runs on both (latency 101)
//     and the result path sums both PEs in the ACC, applies ReLU and
//     requantisation in the SFU and writes the line into the global buffer;
//     a second request max-pools two halves of PE 0's result; both lines
//     are read back and compared with a reference computed here;
//  4. after an inference tick the weights are rewritten: PE 0's crossbar
//     cells must show bit pairs rotated by one and rows moved by one, and
//     the computation must still be exact;
//  5. a crossbar row of PE 0 is rewritten 0x00 / 0xFF until cells wear
//     out: the chip must report the fault with the right PE / APU row,
//     halt the command port, and resume after the host drains the queue.
// Each mechanism is counted; a count of zero is a failure.
module tb_hamun_chip;
  import hamun_pkg::*;
  localparam int NP = 2;
  localparam int WCYC = 60;
  localparam int L = 4;
  localparam int KN = 4, KM = 32;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0; always @(posedge clk) cyc <= cyc + 1;

  logic mm_valid, mm_ready; logic [5:0] mm_pe; line_kind_e mm_kind; logic [2:0] mm_row;
  logic [6:0] mm_addr; logic [LINE_W-1:0] mm_line;
  logic ext_gb_valid, ext_gb_sel, ext_gb_ready; logic [19:0] ext_gb_addr; logic [LINE_W-1:0] ext_gb_data;
  logic ext_rd_valid, ext_rd_sel, ext_rd_ready, ext_rd_data_valid; logic [19:0] ext_rd_addr;
  logic [LINE_W-1:0] ext_rd_data;
  logic cmd_valid, cmd_ready, inf_tick; logic [5:0] cmd_pe; pe_cmd_t cmd;
  logic gb_send_valid, gb_send_sel, gb_send_ready; logic [19:0] gb_send_addr; logic [5:0] gb_send_pe;
  line_kind_e gb_send_kind; logic [2:0] gb_send_row; logic [6:0] gb_send_paddr;
  logic res_valid, res_half, res_first, res_last, relu_en, res_dst_sel, res_ready;
  logic [5:0] res_pe; logic [3:0] res_addr, pool_len; logic [1:0] res_col; logic [4:0] sfu_shift;
  logic [19:0] res_dst_addr;
  logic tcfg_valid; logic [11:0] tcfg_rows, tcfg_cols;
  logic fault_valid, fault_pop, resume, halt; chip_fault_t fault;
  logic [31:0] fault_count, tbg_conflict_cycles;

  hamun_chip #(.NPE(NP), .ROW_WR_CYC_P(WCYC), .ENDURANCE_MEAN(64'd10), .GB_LINES(256)) dut (.*);

  // mechanism counters
  int m_transpose, m_conflict, m_wr_row, m_mask, m_noc_mm, m_noc_gb, m_compute,
      m_acc, m_sfu_relu, m_pool, m_rotation, m_row_shift, m_fault, m_halt, m_resume;

  logic [7:0] W [NP][L][PE_N][W_PER_ROW];
  logic signed [7:0] A [NP][XB_ROWS];
  logic [7:0] K [KN][KM];

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic mm_send(input int pe, input line_kind_e k, input int row, input int addr,
                         input logic [LINE_W-1:0] d);
    @(negedge clk); mm_valid = 1; mm_pe = 6'(pe); mm_kind = k; mm_row = 3'(row);
    mm_addr = 7'(addr); mm_line = d;
    @(posedge clk); while (!mm_ready) @(posedge clk);
    #1 mm_valid = 0;
  endtask

  task automatic gb_write(input bit sel, input int addr, input logic [LINE_W-1:0] d);
    @(negedge clk); ext_gb_valid = 1; ext_gb_sel = sel; ext_gb_addr = 20'(addr); ext_gb_data = d;
    @(posedge clk); while (!ext_gb_ready) @(posedge clk);
    #1 ext_gb_valid = 0;
  endtask

  task automatic gb_read(input bit sel, input int addr, output logic [LINE_W-1:0] d);
    @(negedge clk); ext_rd_valid = 1; ext_rd_sel = sel; ext_rd_addr = 20'(addr);
    @(posedge clk); while (!ext_rd_ready) @(posedge clk);
    #1 ext_rd_valid = 0;
    @(negedge clk);
    check(ext_rd_data_valid, "ext read data valid");
    d = ext_rd_data;
  endtask

  task automatic gb_to_pe(input int addr, input int pe, input line_kind_e k, input int row, input int paddr);
    @(negedge clk); gb_send_valid = 1; gb_send_sel = 0; gb_send_addr = 20'(addr);
    gb_send_pe = 6'(pe); gb_send_kind = k; gb_send_row = 3'(row); gb_send_paddr = 7'(paddr);
    @(posedge clk); while (!gb_send_ready) @(posedge clk);
    #1 gb_send_valid = 0;
  endtask

  // issue a PE command, wait for cmd_ready (or halt); returns latency
  task automatic issue(input int pe, input pe_cmd_t c, output int lat);
    int t0;
    @(negedge clk); cmd_pe = 6'(pe);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1; t0 = cyc;
    @(negedge clk); cmd_valid = 0;
    while (!cmd_ready && !halt) @(negedge clk);
    lat = cyc - t0 - 1;
  endtask

  // PE result -> ACC -> SFU -> global buffer
  task automatic result(input int pe, input int col, input int half, input bit first, input bit last,
                        input int dst_addr);
    @(negedge clk); res_valid = 1; res_pe = 6'(pe); res_addr = 0; res_col = 2'(col);
    res_half = half[0]; res_first = first; res_last = last; res_dst_sel = 0;
    res_dst_addr = 20'(dst_addr);
    @(posedge clk); while (!res_ready) @(posedge clk);
    #1 res_valid = 0;
  endtask

  function automatic longint dot(input int p, input int j, input int k);
    longint e = 0;
    for (int l = 0; l < L; l++)
      if (!(p == 1 && j == 1 && k == 3)) e += longint'(A[p][l]) * longint'(W[p][l][j][k]);
    return e;
  endfunction

  function automatic logic signed [7:0] quant(input longint v, input bit relu, input int sh);
    longint x = (relu && v < 0) ? 0 : v;
    x = x >>> sh;
    if (x > 127) x = 127;
    if (x < -128) x = -128;
    return 8'(x);
  endfunction

  task automatic load_weights(input int p);
    int lat;
    pe_cmd_t c;
    for (int l = 0; l < L; l++) begin
      for (int j = 0; j < PE_N; j++)
        for (int h = 0; h < 2; h++) begin
          logic [LINE_W-1:0] d;
          for (int b = 0; b < 16; b++) begin
            W[p][l][j][16*h + b] = 8'($urandom);
            d[8*b +: 8] = W[p][l][j][16*h + b];
          end
          mm_send(p, LK_DIRECT, 0, 2 * j + h, d);
          m_noc_mm++;
        end
      c = '0; c.op = OP_WRITE_ROW; c.pe_row = 0; c.xb_row = 7'(l); c.buf_addr = 0;
      issue(p, c, lat);
      check(lat == 2 * PE_N + 3 + WCYC, $sformatf("PE%0d WRITE_ROW latency %0d", p, lat));
      if (lat == 2 * PE_N + 3 + WCYC) m_wr_row++;
    end
  endtask

  task automatic compute_both();
    int lat;
    pe_cmd_t c;
    for (int p = 0; p < NP; p++) begin
      c = '0; c.op = OP_COMPUTE; c.row_en = 6'b000001; c.buf_addr = 32; c.out_addr = 0;
      issue(p, c, lat);
      check(lat == 2 + XB_CMP_CYC + 3, $sformatf("PE%0d COMPUTE latency %0d", p, lat));
      if (lat == 2 + XB_CMP_CYC + 3) m_compute++;
    end
  endtask

  // ACC over both PEs, ReLU + shift, into the global buffer; checked on read-back
  task automatic acc_check(input int col, input int half, input int addr);
    logic [LINE_W-1:0] d;
    int bad = 0;
    relu_en = 1; sfu_shift = 9; pool_len = 1;
    result(0, col, half, 1, 0, addr);
    result(1, col, half, 0, 1, addr);
    repeat (6) @(negedge clk);
    gb_read(0, addr, d);
    for (int b = 0; b < 16; b++) begin
      automatic longint s = dot(0, col, 16 * half + b) + dot(1, col, 16 * half + b);
      automatic logic [7:0] e = quant(s, 1, 9);
      check(d[8*b +: 8] == e, $sformatf("ACC/SFU col %0d half %0d lane %0d: %0d exp %0d (sum %0d)",
                                        col, half, b, d[8*b +: 8], e, s));
      if (d[8*b +: 8] != e) bad++;
    end
    if (bad == 0) begin m_acc++; m_sfu_relu++; end
  endtask

  task automatic pool_check(input int col, input int addr);
    logic [LINE_W-1:0] d;
    int bad = 0;
    relu_en = 0; sfu_shift = 8; pool_len = 2;
    result(0, col, 0, 1, 1, addr);
    result(0, col, 1, 1, 1, addr);
    repeat (6) @(negedge clk);
    gb_read(0, addr, d);
    for (int b = 0; b < 16; b++) begin
      automatic logic signed [7:0] e0 = quant(dot(0, col, b), 0, 8);
      automatic logic signed [7:0] e1 = quant(dot(0, col, 16 + b), 0, 8);
      automatic logic [7:0] e = (e0 > e1) ? e0 : e1;
      check(d[8*b +: 8] == e, $sformatf("pool lane %0d: %0d exp %0d", b, d[8*b +: 8], e));
      if (d[8*b +: 8] != e) bad++;
    end
    if (bad == 0) m_pool++;
    pool_len = 1;
  endtask

  task automatic send_acts(input bit only_written);
    for (int p = 0; p < NP; p++)
      for (int ln = 0; ln < 8; ln++) begin
        logic [LINE_W-1:0] d;
        for (int b = 0; b < 16; b++) begin
          A[p][16*ln + b] = (only_written && 16 * ln + b >= L) ? 8'd0 : 8'($urandom);
          d[8*b +: 8] = A[p][16*ln + b];
        end
        if (p == 0) begin
          mm_send(0, LK_ACT, 0, 32, d); m_noc_mm++;
        end else begin
          gb_write(0, 10 + ln, d);
          gb_to_pe(10 + ln, 1, LK_ACT, 0, 32); m_noc_gb++;
        end
      end
    repeat (20) @(negedge clk);
  endtask

  initial begin
    int lat, nerr;
    pe_cmd_t c;
    logic [LINE_W-1:0] d;
    logic [31:0] cc0;
    {mm_valid, ext_gb_valid, ext_rd_valid, cmd_valid, inf_tick, gb_send_valid, res_valid,
     tcfg_valid, fault_pop, resume} = '0;
    mm_pe = 0; mm_kind = LK_DIRECT; mm_row = 0; mm_addr = 0; mm_line = '0;
    ext_gb_sel = 0; ext_gb_addr = 0; ext_gb_data = '0; ext_rd_sel = 0; ext_rd_addr = 0;
    cmd_pe = 0; cmd = '0; gb_send_sel = 0; gb_send_addr = 0; gb_send_pe = 0;
    gb_send_kind = LK_DIRECT; gb_send_row = 0; gb_send_paddr = 0;
    res_pe = 0; res_addr = 0; res_col = 0; res_half = 0; res_first = 0; res_last = 0;
    relu_en = 0; sfu_shift = 0; pool_len = 1; res_dst_sel = 0; res_dst_addr = 0;
    tcfg_rows = 0; tcfg_cols = 0;
    {m_transpose, m_conflict, m_wr_row, m_mask, m_noc_mm, m_noc_gb, m_compute,
     m_acc, m_sfu_relu, m_pool, m_rotation, m_row_shift, m_fault, m_halt, m_resume} = '0;
    repeat (3) @(negedge clk); rst_n = 1;

    // 1. key matrix through the transposing bank group
    @(negedge clk); tcfg_valid = 1; tcfg_rows = 12'(KN); tcfg_cols = 12'(KM);
    @(negedge clk); tcfg_valid = 0;
    cc0 = tbg_conflict_cycles;
    for (int r = 0; r < KN; r++)
      for (int t = 0; t < KM / 16; t++) begin
        for (int b = 0; b < 16; b++) begin K[r][16*t + b] = 8'($urandom); d[8*b +: 8] = K[r][16*t + b]; end
        gb_write(1, 0, d);
      end
    repeat (4) @(negedge clk);
    nerr = 0;
    for (int e = 0; e < KN * KM / 16; e++) begin
      gb_read(1, e, d);
      for (int b = 0; b < 16; b++) begin
        automatic int P = 16 * e + b;
        check(d[8*b +: 8] == K[P % KN][P / KN], $sformatf("K^T entry %0d byte %0d", e, b));
        if (d[8*b +: 8] != K[P % KN][P / KN]) nerr++;
      end
    end
    if (nerr == 0) m_transpose++;
    if (tbg_conflict_cycles > cc0) m_conflict++;

    // 2. weights, with weight 3 of APU(0,1) of PE 1 retired
    c = '0; c.op = OP_SET_MASK; c.pe_row = 0; c.pe_col = 1; c.mask = '0; c.mask[15:12] = 4'hF;
    issue(1, c, lat);
    check(lat == 0, $sformatf("SET_MASK latency %0d", lat));
    for (int p = 0; p < NP; p++) load_weights(p);
    begin
      int ok = 1;
      for (int l = 0; l < L; l++)
        for (int q = 0; q < 4; q++)
          if (dut.g_pe[1].u_pe.g_row[0].g_col[1].u_apu.u_xb.level[l][12 + q] != 2'd0) ok = 0;
      check(ok == 1, "masked cells left unwritten");
      if (ok == 1) m_mask++;
    end

    // 3. activations, computation, result path
    send_acts(0);
    compute_both();
    for (int col = 0; col < PE_N; col++)
      for (int h = 0; h < 2; h++) acc_check(col, h, 100 + 2 * col + h);
    pool_check(2, 120);

    // result path rate: one request every 4 cycles
    begin
      int t0, t1;
      relu_en = 0; sfu_shift = 0; pool_len = 1;
      @(negedge clk); res_valid = 1; res_pe = 0; res_first = 1; res_last = 1; res_dst_addr = 200;
      @(posedge clk); while (!res_ready) @(posedge clk);
      t0 = cyc;
      @(posedge clk); while (!res_ready) @(posedge clk);
      t1 = cyc;
      #1 res_valid = 0;
      check(t1 - t0 == 4, $sformatf("result request interval %0d", t1 - t0));
    end

    // 4. wear leveling: next inference, PE 0 rewritten, rotation 1, start row 1
    @(negedge clk); inf_tick = 1; @(negedge clk); inf_tick = 0;
    for (int p = 0; p < NP; p++) load_weights(p);
    begin
      int okr = 1, oks = 1;
      for (int l = 0; l < L; l++)
        for (int cc = 0; cc < XB_COLS; cc++) begin
          automatic logic [1:0] e = W[0][l][0][cc / 4][2 * (((cc % 4) + 1) % 4) +: 2];
          if (dut.g_pe[0].u_pe.g_row[0].g_col[0].u_apu.u_xb.level[l + 1][cc] != e) okr = 0;
        end
      check(okr == 1, "rotated, shifted layout");
      if (okr == 1) begin m_rotation++; m_row_shift++; end
    end
    // rows left from the previous inference now sit under logical rows
    // that carry no input here
    send_acts(1);
    compute_both();
    acc_check(0, 0, 130);
    acc_check(3, 1, 131);

    // 5. wear-out of row 50 of PE row 1 of PE 0
    begin
      int n = 0;
      while (!halt && n < 40) begin
        for (int j = 0; j < PE_N; j++)
          for (int h = 0; h < 2; h++) mm_send(0, LK_DIRECT, 1, 2 * j + h, (n % 2) ? '1 : '0);
        c = '0; c.op = OP_WRITE_ROW; c.pe_row = 1; c.xb_row = 50; c.buf_addr = 0;
        issue(0, c, lat);
        repeat (4) @(negedge clk);
        n++;
      end
      check(halt, "halt after wear-out");
      check(fault_valid, "fault reported");
      if (halt) m_halt++;
      @(negedge clk); cmd_pe = 0;
      check(!cmd_ready, "commands blocked while halted");
      while (fault_valid) begin
        check(fault.pe == 0 && fault.pf.apu_row == 1 && fault.pf.f.row == 7'((50 + 1) % XB_ROWS)
              && fault.pf.f.cols != '0,
              $sformatf("fault record pe %0d row %0d xb row %0d", fault.pe, fault.pf.apu_row, fault.pf.f.row));
        if (fault.pe == 0 && fault.pf.apu_row == 1) m_fault++;
        @(negedge clk); fault_pop = 1; @(negedge clk); fault_pop = 0;
        repeat (2) @(negedge clk);
      end
      check(fault_count > 0, "fault count");
      @(negedge clk); resume = 1; @(negedge clk); resume = 0;
      @(negedge clk);
      check(!halt && cmd_ready, "resume");
      if (!halt && cmd_ready) m_resume++;
    end

    check(m_transpose > 0, "mechanism: transposed key write");
    check(m_conflict > 0, "mechanism: bank conflict drain");
    check(m_wr_row > 0, "mechanism: P&V row write");
    check(m_mask > 0, "mechanism: column masking");
    check(m_noc_mm > 0, "mechanism: network from main memory");
    check(m_noc_gb > 0, "mechanism: network from global buffer");
    check(m_compute > 0, "mechanism: crossbar computation");
    check(m_acc > 0, "mechanism: ACC over PEs");
    check(m_sfu_relu > 0, "mechanism: SFU ReLU/requantisation");
    check(m_pool > 0, "mechanism: SFU max pooling");
    check(m_rotation > 0, "mechanism: bit-pair rotation");
    check(m_row_shift > 0, "mechanism: row shifting");
    check(m_fault > 0, "mechanism: fault report");
    check(m_halt > 0, "mechanism: halt");
    check(m_resume > 0, "mechanism: resume");
    $display("mechanisms: transpose=%0d conflict=%0d wr_row=%0d mask=%0d noc_mm=%0d noc_gb=%0d compute=%0d acc=%0d sfu=%0d pool=%0d rot=%0d shift=%0d fault=%0d halt=%0d resume=%0d",
             m_transpose, m_conflict, m_wr_row, m_mask, m_noc_mm, m_noc_gb, m_compute, m_acc,
             m_sfu_relu, m_pool, m_rotation, m_row_shift, m_fault, m_halt, m_resume);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pe: a layer of 256 inputs x 128 outputs mapped on PE rows 0 and 1.
// Weights arrive as direct lines and are written row by row (6 crossbar
// rows per PE row) with one retired column group masked; activations
// arrive as bytes and pass through the shift register set; a COMPUTE over
// both PE rows must give, in the output buffer, sum over both rows of
// activation x weight for every output (reference computed here), with
// the masked weight reading 0. Then the wear-out path: row 10 of PE row 2
// is rewritten 0x00/0xFF until cells stick, and the PE must report faults
// of APUs in PE row 2 on its fault port. Command latencies are checked.
module tb_pe;
  import hamun_pkg::*;
  localparam int WCYC = 60;
  localparam int L = 6;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic halt, inf_tick, in_valid, in_ready, cmd_valid, cmd_ready, out_re;
  line_kind_e in_kind; logic [2:0] in_row; logic [6:0] in_addr; logic [LINE_W-1:0] in_line;
  pe_cmd_t cmd; logic [3:0] out_raddr; psum_t out_rdata [PE_N][W_PER_ROW];
  logic fault_valid, fault_ready; pe_fault_t fault;
  logic [5:0] pe_id = 6'd5;
  pe #(.ROW_WR_CYC_P(WCYC), .ENDURANCE_MEAN(64'd10)) dut (.*);

  logic [7:0] W [2][L][PE_N][W_PER_ROW];
  logic signed [7:0] A [2][XB_ROWS];
  logic [XB_COLS-1:0] msk;
  int cyc = 0; always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic send(input line_kind_e k, input int row, input int addr, input logic [LINE_W-1:0] d);
    @(negedge clk); in_valid = 1; in_kind = k; in_row = 3'(row); in_addr = 7'(addr); in_line = d;
    @(posedge clk); while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask
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
    halt = 0; inf_tick = 0; in_valid = 0; in_kind = LK_DIRECT; in_row = 0; in_addr = 0; in_line = '0;
    cmd_valid = 0; cmd = '0; out_re = 0; out_raddr = 0; fault_ready = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // retire weight 5 of APU(1,2)
    msk = '0; msk[23:20] = 4'hF;
    c = '0; c.op = OP_SET_MASK; c.pe_row = 1; c.pe_col = 2; c.mask = msk;
    issue(c, lat);
    check(lat == 0, $sformatf("SET_MASK latency %0d", lat));

    // weights
    for (int i = 0; i < 2; i++)
      for (int l = 0; l < L; l++) begin
        for (int j = 0; j < PE_N; j++)
          for (int h = 0; h < 2; h++) begin
            logic [LINE_W-1:0] d;
            for (int b = 0; b < 16; b++) begin
              W[i][l][j][16*h + b] = 8'($urandom);
              d[8*b +: 8] = W[i][l][j][16*h + b];
            end
            send(LK_DIRECT, i, 2 * j + h, d);
          end
        c = '0; c.op = OP_WRITE_ROW; c.pe_row = 3'(i); c.xb_row = 7'(l); c.buf_addr = 0;
        issue(c, lat);
        check(lat == 2 * PE_N + 3 + WCYC, $sformatf("WRITE_ROW latency %0d", lat));
      end

    // activations (8 lines of 16 bytes per PE row) into lines 32..39
    for (int i = 0; i < 2; i++)
      for (int ln = 0; ln < 8; ln++) begin
        logic [LINE_W-1:0] d;
        for (int b = 0; b < 16; b++) begin
          A[i][16*ln + b] = 8'($urandom);
          d[8*b +: 8] = A[i][16*ln + b];
        end
        send(LK_ACT, i, 32, d);
      end
    repeat (10) @(negedge clk);

    c = '0; c.op = OP_COMPUTE; c.row_en = 6'b000011; c.buf_addr = 32; c.out_addr = 3;
    issue(c, lat);
    // 2 cycles to the first plane, 96 computation cycles, 3 cycles
    // through the ADD array into the output buffer
    check(lat == 2 + XB_CMP_CYC + 3, $sformatf("COMPUTE latency %0d", lat));
    @(negedge clk); out_re = 1; out_raddr = 3;
    @(negedge clk); out_re = 0;
    for (int j = 0; j < PE_N; j++)
      for (int k = 0; k < W_PER_ROW; k++) begin
        automatic longint e = 0;
        for (int i = 0; i < 2; i++)
          for (int l = 0; l < L; l++)
            if (!(i == 1 && j == 2 && k == 5)) e += longint'(A[i][l]) * longint'(W[i][l][j][k]);
        check(longint'(out_rdata[j][k]) == e, $sformatf("out[%0d][%0d]=%0d exp %0d", j, k, out_rdata[j][k], e));
      end

    // wear-out of row 10 in PE row 2
    begin
      automatic int nf = 0;
      fault_ready = 1;
      for (int n = 0; n < 10; n++) begin
        for (int j = 0; j < PE_N; j++)
          for (int h = 0; h < 2; h++) send(LK_DIRECT, 2, 2 * j + h, (n % 2) ? '1 : '0);
        c = '0; c.op = OP_WRITE_ROW; c.pe_row = 2; c.xb_row = 10; c.buf_addr = 0;
        issue(c, lat);
        repeat (6) begin
          @(negedge clk);
          if (fault_valid) begin
            nf++;
            check(fault.apu_row == 3'd2 && fault.f.row == 7'd10 && fault.f.cols != 0, "fault record");
          end
        end
      end
      check(nf > 0, "faults reported");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

// tb_transpose_bank_group: writes random N x M matrices row by row in
// 16-byte transactions and reads the banks entry by entry. The reference
// places element alpha at P(alpha) = N*alpha mod (MN-1) (P = MN-1 for the
// last element), the paper's formula, and expects bank b of entry e to hold
// transposed element 16e + b. Odd N must stream one transaction per cycle
// with no bank conflict; even N must report conflict cycles and still store
// everything correctly; M = 20 exercises short transactions at row ends.
module tb_transpose_bank_group;
  import hamun_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cfg_valid, wr_valid, wr_ready, rd_valid;
  logic [11:0] cfg_rows, cfg_cols;
  logic [7:0] wr_data [TB_BANKS];
  logic [7:0] rd_data [TB_BANKS];
  logic [10:0] rd_entry;
  logic [31:0] conflict_cycles;
  transpose_bank_group dut (.*);

  logic [7:0] K [8192];
  logic [7:0] T [8192];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int N, input int M);
    int MN, c0, t0, t1, ntx, cc0;
    MN = N * M;
    for (int a = 0; a < MN; a++) begin
      K[a] = 8'($urandom);
      T[(a == MN - 1) ? MN - 1 : (N * a) % (MN - 1)] = K[a];
    end
    @(negedge clk); cfg_valid = 1; cfg_rows = 12'(N); cfg_cols = 12'(M);
    @(negedge clk); cfg_valid = 0;
    cc0 = int'(conflict_cycles);
    ntx = 0; t0 = cyc;
    for (int r = 0; r < N; r++)
      for (c0 = 0; c0 < M; c0 += TB_BANKS) begin
        wr_valid = 1;
        for (int l = 0; l < TB_BANKS; l++) wr_data[l] = (c0 + l < M) ? K[r * M + c0 + l] : 8'h00;
        @(posedge clk); while (!wr_ready) @(posedge clk);
        #1; ntx++;
      end
    wr_valid = 0;
    t1 = cyc;
    while (!wr_ready) @(negedge clk);
    @(negedge clk);
    if (N % 2 == 1) begin
      check(t1 - t0 == ntx, $sformatf("N=%0d streams one transaction per cycle (%0d/%0d)", N, t1 - t0, ntx));
      check(int'(conflict_cycles) == cc0, "no bank conflict for odd N");
    end else
      check(int'(conflict_cycles) > cc0, "bank conflicts counted for even N");
    for (int e = 0; e < (MN + TB_BANKS - 1) / TB_BANKS; e++) begin
      @(negedge clk); rd_valid = 1; rd_entry = 11'(e);
      @(negedge clk); rd_valid = 0;
      for (int b = 0; b < TB_BANKS; b++)
        if (e * TB_BANKS + b < MN)
          check(rd_data[b] == T[e * TB_BANKS + b], $sformatf("N=%0d M=%0d entry %0d bank %0d", N, M, e, b));
    end
  endtask

  initial begin
    cfg_valid = 0; wr_valid = 0; rd_valid = 0; cfg_rows = 0; cfg_cols = 0; rd_entry = 0;
    for (int l = 0; l < TB_BANKS; l++) wr_data[l] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(5, 32);
    run(4, 48);
    run(3, 20);
    run(197 % 64 + 1, 64);   // 6 x 64
    run(7, 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

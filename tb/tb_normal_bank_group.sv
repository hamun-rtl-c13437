// tb_normal_bank_group: writes and reads back random lines at random
// addresses spread over the whole (default, 8 MB less 32 KB) bank group.
module tb_normal_bank_group;
  import hamun_pkg::*;
  localparam int LINES = (8 * 1024 * 1024 - TB_BANKS * 2048) / LINE_BYTES;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, re; logic [18:0] waddr, raddr; logic [LINE_W-1:0] wdata, rdata;
  logic [18:0] addrs [64]; logic [LINE_W-1:0] vals [64];
  normal_bank_group dut (.*);
  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int n = 0; n < 64; n++) begin
      addrs[n] = 19'((n == 63) ? LINES - 1 : n * (LINES / 64) + $urandom_range(100));
      vals[n] = {4{$urandom}};
      @(negedge clk); we = 1; waddr = addrs[n]; wdata = vals[n];
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 64; n++) begin
      @(negedge clk); re = 1; raddr = addrs[n];
      @(negedge clk); re = 0;
      checks++; if (rdata != vals[n]) begin failures++; $display("FAIL: addr %0d", addrs[n]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

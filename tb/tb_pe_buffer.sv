// tb_pe_buffer: writes random lines, reads them back with the one-cycle
// read latency, and checks that simultaneous write and read work.
module tb_pe_buffer;
  import hamun_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, re; logic [6:0] waddr, raddr; logic [LINE_W-1:0] wdata, rdata;
  logic [LINE_W-1:0] ref_m [BUF_LINES];
  pe_buffer dut (.*);
  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int a = 0; a < BUF_LINES; a++) begin
      @(negedge clk); we = 1; waddr = 7'(a); wdata = {4{$urandom}}; ref_m[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 300; n++) begin
      int a; a = $urandom_range(BUF_LINES - 1);
      @(negedge clk); re = 1; raddr = 7'(a);
      we = 1; waddr = 7'($urandom_range(BUF_LINES - 1)); wdata = {4{$urandom}};
      if (waddr == raddr) we = 0;
      @(posedge clk); #1; re = 0;
      if (we) ref_m[waddr] = wdata;
      we = 0;
      checks++; if (rdata != ref_m[a]) begin failures++; $display("FAIL: line %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

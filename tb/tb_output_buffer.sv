// tb_output_buffer: fills all entries with random sums and reads them back.
module tb_output_buffer;
  import hamun_pkg::*;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we, re; logic [3:0] waddr, raddr;
  psum_t wdata [PE_N][W_PER_ROW];
  psum_t rdata [PE_N][W_PER_ROW];
  psum_t ref_m [OBUF_DEPTH][PE_N][W_PER_ROW];
  output_buffer dut (.*);
  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0;
    for (int e = 0; e < OBUF_DEPTH; e++) begin
      @(negedge clk); we = 1; waddr = 4'(e);
      for (int j = 0; j < PE_N; j++) for (int k = 0; k < W_PER_ROW; k++) begin
        wdata[j][k] = psum_t'($urandom); ref_m[e][j][k] = wdata[j][k];
      end
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 40; n++) begin
      int e; e = $urandom_range(OBUF_DEPTH - 1);
      @(negedge clk); re = 1; raddr = 4'(e);
      @(negedge clk); re = 0;
      for (int j = 0; j < PE_N; j++) for (int k = 0; k < W_PER_ROW; k++) begin
        checks++; if (rdata[j][k] != ref_m[e][j][k]) begin failures++; $display("FAIL: e%0d", e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

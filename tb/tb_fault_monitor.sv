// tb_fault_monitor: four PEs raise fault records at random times. Every
// record must reach the host exactly once, tagged with its PE; halt must
// rise with the first record and fall only on resume with the queue empty;
// the FIFO must back-pressure the PEs when full.
module tb_fault_monitor;
  import hamun_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic pe_valid [NP]; pe_fault_t pe_fault [NP]; logic pe_ready [NP];
  logic host_valid, host_pop, resume, halt; chip_fault_t host_fault; logic [31:0] fault_count;
  fault_monitor #(.NPE(NP), .DEPTH(4)) dut (.*);
  int sent, got, seen_full;
  logic [31:0] exp_tag [$];
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    host_pop = 0; resume = 0; sent = 0; got = 0; seen_full = 0;
    for (int p = 0; p < NP; p++) begin pe_valid[p] = 0; pe_fault[p] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    check(!halt, "no halt after reset");
    for (int cyc = 0; cyc < 300; cyc++) begin
      bit acc [NP];
      bit popped;
      @(posedge clk);
      for (int p = 0; p < NP; p++) acc[p] = pe_valid[p] && pe_ready[p];
      popped = host_pop && host_valid;
      if (popped) begin
        logic [31:0] e;
        e = exp_tag.pop_front();
        check({host_fault.pe, host_fault.pf.f.row} == {6'(e[15:8]), 7'(e[6:0])}, "record order/content");
        got++;
      end
      for (int p = 0; p < NP; p++)
        if (acc[p]) begin exp_tag.push_back({16'd0, 8'(p), 1'b0, pe_fault[p].f.row}); sent++; end
      @(negedge clk);
      if (!pe_ready[0] && !pe_ready[1] && !pe_ready[2] && !pe_ready[3] &&
          (pe_valid[0] || pe_valid[1] || pe_valid[2] || pe_valid[3])) seen_full++;
      for (int p = 0; p < NP; p++)
        if (!pe_valid[p] || acc[p]) begin
          pe_valid[p] = (cyc < 250) && ($urandom_range(5) == 0);
          pe_fault[p].apu_row = 3'(p); pe_fault[p].f.row = 7'($urandom); pe_fault[p].f.cols = '1;
        end
      host_pop = (cyc > 40) && ($urandom_range(2) == 0);
      if (sent > 0) check(halt || (cyc > 260), "halt while faults pending");
    end
    host_pop = 0;
    @(negedge clk); resume = 1; @(negedge clk); resume = 0;
    check(!halt, "halt cleared by resume");
    check(got == sent && sent > 20, $sformatf("all records delivered %0d/%0d", got, sent));
    check(int'(fault_count) == sent, "fault count");
    check(seen_full > 0, "queue filled and back-pressured");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

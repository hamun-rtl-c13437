// tb_noc: two sources send random transactions to random PEs whose ready
// lines toggle randomly. Every transaction must reach exactly its PE with
// its payload, in order per source, with no loss or duplication, and both
// sources must be served (round robin).
module tb_noc;
  import hamun_pkg::*;
  localparam int ND = 8;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic src_valid [2]; logic [5:0] src_pe [2]; line_kind_e src_kind [2];
  logic [2:0] src_row [2]; logic [6:0] src_addr [2]; logic [LINE_W-1:0] src_line [2];
  logic src_ready [2]; logic dst_valid [ND]; logic dst_ready [ND];
  line_kind_e dst_kind; logic [2:0] dst_row; logic [6:0] dst_addr; logic [LINE_W-1:0] dst_line;
  noc #(.NSRC(2), .NDST(ND)) dut (.*);
  int sent [2], got [2];
  initial begin
    for (int s = 0; s < 2; s++) begin
      src_valid[s] = 0; src_pe[s] = 0; src_kind[s] = LK_DIRECT; src_row[s] = 0; src_addr[s] = 0; src_line[s] = '0;
      sent[s] = 0; got[s] = 0;
    end
    for (int d = 0; d < ND; d++) dst_ready[d] = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 400; cyc++) begin
      bit take [2];
      bit acc [2];
      // acceptance is decided at the clock edge
      @(posedge clk);
      for (int s = 0; s < 2; s++) acc[s] = src_valid[s] && src_ready[s];
      @(negedge clk);
      for (int s = 0; s < 2; s++) begin
        take[s] = !src_valid[s] || acc[s];
        if (acc[s]) got[s]++;
      end
      for (int d = 0; d < ND; d++) dst_ready[d] = ($urandom_range(3) != 0);
      for (int s = 0; s < 2; s++)
        if (take[s]) begin
          // previous one accepted at the last edge: offer the next
          src_valid[s] = (cyc < 380);
          src_pe[s] = 6'($urandom_range(ND - 1));
          src_kind[s] = line_kind_e'(s);
          src_row[s] = 3'($urandom); src_addr[s] = 7'(sent[s]);
          src_line[s] = {$urandom, $urandom, 32'(s), 32'(sent[s])};
          sent[s]++;
        end
      #1;
      begin
        int nv; nv = 0;
        for (int d = 0; d < ND; d++) if (dst_valid[d]) nv++;
        checks++; if (nv > 1) begin failures++; $display("FAIL: two destinations"); end
        for (int s = 0; s < 2; s++)
          if (src_ready[s]) begin
            checks++;
            if (!(dst_valid[src_pe[s]] && dst_ready[src_pe[s]] && dst_line == src_line[s] &&
                  dst_addr == src_addr[s] && dst_kind == src_kind[s] && dst_row == src_row[s])) begin
              failures++; $display("FAIL: delivery src %0d", s);
            end
            checks++;
            if (int'(dst_line[31:0]) != got[s]) begin failures++; $display("FAIL: order src %0d got %0d line %0d", s, got[s], dst_line[31:0]); end
          end
      end
    end
    checks++; if (got[0] < 50 || got[1] < 50) begin failures++; $display("FAIL: fairness %0d %0d", got[0], got[1]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

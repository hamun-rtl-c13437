// fault_monitor: the online monitoring part of the chip. Program-and-verify
// in the APUs finds cells stuck after wear-out; every PE offers such fault
// records (PE row/column of the APU, physical crossbar row, faulty columns).
// The monitor takes one record per cycle from the PEs, round robin, tags it
// with the PE number and queues it in a DEPTH-entry FIFO that the host reads
// (host_valid / host_pop). As the paper requires, execution stops at a new
// fault: halt rises with the first queued record and stays high until the
// host, having decided whether to keep or retire the faulty cells, pulses
// resume with the queue empty. halt gates the PE command ports. The FIFO,
// the arbitration and the resume handshake are this design's choices.
module fault_monitor
  import hamun_pkg::*;
#(
  parameter int NPE   = N_PE,
  parameter int DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pe_valid [NPE],
  input  pe_fault_t   pe_fault [NPE],
  output logic        pe_ready [NPE],
  output logic        host_valid,
  output chip_fault_t host_fault,
  input  logic        host_pop,
  input  logic        resume,
  output logic        halt,
  output logic [31:0] fault_count
);
  localparam int PW = $clog2(NPE) > 0 ? $clog2(NPE) : 1;
  localparam int AW = $clog2(DEPTH);

  chip_fault_t q [DEPTH];
  logic [AW:0] wp, rp;
  logic        full, empty;
  assign empty = (wp == rp);
  assign full  = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);

  logic [PW-1:0] last, sel;
  logic          any;
  always_comb begin
    any = 1'b0; sel = '0;
    for (int k = 1; k <= NPE; k++) begin
      int p;
      p = (int'(last) + k) % NPE;
      if (!any && pe_valid[p]) begin any = 1'b1; sel = PW'(p); end
    end
    for (int p = 0; p < NPE; p++) pe_ready[p] = any && !full && (sel == PW'(p));
  end

  assign host_valid = !empty;
  assign host_fault = q[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wp <= '0; rp <= '0; last <= PW'(NPE - 1); halt <= 1'b0; fault_count <= '0;
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
    end else begin
      if (any && !full) begin
        q[wp[AW-1:0]] <= '{pe: 6'(sel), pf: pe_fault[sel]};
        wp <= wp + 1'b1;
        last <= sel;
        halt <= 1'b1;
        fault_count <= fault_count + 1;
      end else if (resume && empty) halt <= 1'b0;
      if (host_pop && !empty) rp <= rp + 1'b1;
    end
endmodule

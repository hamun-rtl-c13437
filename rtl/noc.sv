// noc: the on-chip network that carries 16-byte transactions to the PEs.
// The paper's chip uses a mesh of routers; it gives neither the router
// design nor the routing or flow control. This block implements only the
// function the PEs need: transactions from NSRC sources (the Ext-IO side
// and the global buffer) are delivered to the PE named in their header, one
// transaction per cycle. Sources are served round robin; a transaction
// waits (src_ready low) while its destination PE is not ready. The payload
// is broadcast and only the addressed PE sees valid. It is a single-stage
// switch, not a mesh: per-hop latency and link contention are not modelled.
module noc
  import hamun_pkg::*;
#(
  parameter int NSRC = 2,
  parameter int NDST = N_PE
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              src_valid [NSRC],
  input  logic [5:0]        src_pe    [NSRC],
  input  line_kind_e        src_kind  [NSRC],
  input  logic [2:0]        src_row   [NSRC],
  input  logic [6:0]        src_addr  [NSRC],
  input  logic [LINE_W-1:0] src_line  [NSRC],
  output logic              src_ready [NSRC],
  output logic              dst_valid [NDST],
  input  logic              dst_ready [NDST],
  output line_kind_e        dst_kind,
  output logic [2:0]        dst_row,
  output logic [6:0]        dst_addr,
  output logic [LINE_W-1:0] dst_line
);
  localparam int SW = (NSRC > 1) ? $clog2(NSRC) : 1;
  logic [SW-1:0] last;   // last source served
  logic [SW-1:0] sel;
  logic          any;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = 1; k <= NSRC; k++) begin
      int s;
      s = (int'(last) + k) % NSRC;
      if (!any && src_valid[s]) begin any = 1'b1; sel = SW'(s); end
    end
    dst_kind = src_kind[sel];
    dst_row  = src_row[sel];
    dst_addr = src_addr[sel];
    dst_line = src_line[sel];
    for (int d = 0; d < NDST; d++) dst_valid[d] = any && (int'(src_pe[sel]) == d);
    for (int s = 0; s < NSRC; s++)
      src_ready[s] = any && (sel == SW'(s)) && dst_ready[src_pe[sel]];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) last <= SW'(NSRC - 1);
    else if (any && dst_ready[src_pe[sel]]) last <= sel;
endmodule

// pe_buffer: one PE-row buffer (the paper's "Buffer i", 1.5 KB). It holds
// either the weights of the next crossbar rows, written straight from the
// network, or activations in bit-serial form (one 128-bit bit plane per
// line) written by the shift register set. The APUs of the row read it.
// Organisation: BUF_LINES lines of 128 bits, one write port and one read
// port with a one-cycle registered read (a simple dual-port SRAM; the port
// count is this design's choice so that writing the next layer's data can
// overlap reading).
module pe_buffer
  import hamun_pkg::*;
#(
  parameter int LINES = BUF_LINES
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(LINES)-1:0] waddr,
  input  logic [LINE_W-1:0]        wdata,
  input  logic                     re,
  input  logic [$clog2(LINES)-1:0] raddr,
  output logic [LINE_W-1:0]        rdata
);
  logic [LINE_W-1:0] mem [LINES];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule

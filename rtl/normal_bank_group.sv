// normal_bank_group: the normal bank group of the global buffer, holding
// the intermediate activations of a layer in plain order. It is organised
// as LINES lines of 16 bytes (one network transaction each), with one write
// and one read port and a one-cycle registered read. Its default size,
// 8 MB less the 32 KB of the transposing group, makes the whole global
// buffer the paper's 8 MB of on-chip SRAM; the split between the two groups
// and the port count are this design's choices.
module normal_bank_group
  import hamun_pkg::*;
#(
  parameter int LINES = (8 * 1024 * 1024 - TB_BANKS * 2048) / LINE_BYTES
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

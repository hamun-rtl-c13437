// global_buffer: the chip's Global Buffer (Gbuffer), which keeps the
// activations a layer produces for the layers that follow. It holds two
// bank groups: the normal group (plain order, 16-byte lines) and the
// transposing group, into which the key matrix of an attention block is
// written so that it reads back transposed. wr_sel / rd_sel pick the group
// (0 = normal, 1 = transposing). For the transposing group the write
// address is ignored (the element positions come from the group's own
// row/column counters, set by tcfg_valid) and the read address is the bank
// entry. Both groups answer a read one cycle later on rd_data / rd_data_valid.
// wr_ready is low only while the transposing group drains bank conflicts.
module global_buffer
  import hamun_pkg::*;
#(
  parameter int NLINES   = (8 * 1024 * 1024 - TB_BANKS * 2048) / LINE_BYTES,
  parameter int TB_DEPTH = 2048
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tcfg_valid,
  input  logic [11:0]       tcfg_rows,
  input  logic [11:0]       tcfg_cols,
  input  logic              wr_valid,
  input  logic              wr_sel,
  input  logic [19:0]       wr_addr,
  input  logic [LINE_W-1:0] wr_data,
  output logic              wr_ready,
  input  logic              rd_valid,
  input  logic              rd_sel,
  input  logic [19:0]       rd_addr,
  output logic [LINE_W-1:0] rd_data,
  output logic              rd_data_valid,
  output logic [31:0]       conflict_cycles
);
  localparam int NAW = $clog2(NLINES);
  localparam int TAW = $clog2(TB_DEPTH);

  logic [LINE_W-1:0] n_rdata;
  normal_bank_group #(.LINES(NLINES)) u_nbg (
    .clk, .we(wr_valid && !wr_sel), .waddr(NAW'(wr_addr)), .wdata(wr_data),
    .re(rd_valid && !rd_sel), .raddr(NAW'(rd_addr)), .rdata(n_rdata));

  logic [7:0] t_wdata [TB_BANKS];
  logic [7:0] t_rdata [TB_BANKS];
  logic       t_ready;
  always_comb
    for (int b = 0; b < TB_BANKS; b++) t_wdata[b] = wr_data[8*b +: 8];

  transpose_bank_group #(.DEPTH(TB_DEPTH)) u_tbg (
    .clk, .rst_n, .cfg_valid(tcfg_valid), .cfg_rows(tcfg_rows), .cfg_cols(tcfg_cols),
    .wr_valid(wr_valid && wr_sel), .wr_data(t_wdata), .wr_ready(t_ready),
    .rd_valid(rd_valid && rd_sel), .rd_entry(TAW'(rd_addr)), .rd_data(t_rdata),
    .conflict_cycles);

  assign wr_ready = t_ready;

  logic sel_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin sel_q <= 1'b0; rd_data_valid <= 1'b0; end
    else begin sel_q <= rd_sel; rd_data_valid <= rd_valid; end

  always_comb begin
    rd_data = n_rdata;
    if (sel_q)
      for (int b = 0; b < TB_BANKS; b++) rd_data[8*b +: 8] = t_rdata[b];
  end
endmodule

// hamun_chip: top level of the Hamun ReRAM accelerator chip.
//
// N_PE (64) processing elements, each 6 x 4 APUs of 128x128 2-bit ReRAM
// crossbars, a network that delivers 16-byte transactions to the PEs, the
// 8 MB global buffer with a normal and a transposing bank group, the
// chip-level accumulation unit (ACC), the special function unit (SFU) and
// the online fault monitor. The Ext-IO block and the main memory behind it
// are not part of this RTL; their side of the chip is a set of ports (mm_*
// for lines sent to PEs, ext_gb_* for writes into the global buffer,
// ext_rd_* for reading results back). The instruction stream of the
// offline scheduler arrives on cmd_* (one PE command each, see
// pe_controller) and on res_* / gb_send_* / tcfg_* for the data movements
// between PEs, ACC, SFU and global buffer.
//
// Data paths:
//  * mm_* and gb_send_* -> network -> PE buffers (weights direct,
//    activations through the PE's shift register set);
//  * res_*: reads output buffer entry res_addr of PE res_pe, takes 16 of
//    its 128 sums (APU column res_col, half res_half), adds them in the ACC
//    (res_first/res_last delimit a sum over PEs), passes them through the
//    SFU (ReLU, requantisation to 8 bits, max pooling) and writes the
//    resulting line into the global buffer (res_dst_sel 1 = transposing
//    group, for the key matrix). One request is taken every 4 cycles
//    (res_ready).
//  * Faults found while writing crossbar rows go to the fault monitor; the
//    host reads them on fault_*; halt stops all PE command ports until the
//    host pulses resume.
// The port set and the movement commands are this design's choices; the
// blocks and their roles follow the paper's chip diagram.
module hamun_chip
  import hamun_pkg::*;
#(
  parameter int              NPE            = N_PE,
  parameter int              ROW_WR_CYC_P   = ROW_WR_CYC,
  parameter longint unsigned ENDURANCE_MEAN = 64'd2500000000,
  parameter int              GB_LINES       = (8 * 1024 * 1024 - TB_BANKS * 2048) / LINE_BYTES
) (
  input  logic              clk,
  input  logic              rst_n,
  // Ext-IO: lines from main memory to PEs
  input  logic              mm_valid,
  input  logic [5:0]        mm_pe,
  input  line_kind_e        mm_kind,
  input  logic [2:0]        mm_row,
  input  logic [6:0]        mm_addr,
  input  logic [LINE_W-1:0] mm_line,
  output logic              mm_ready,
  // Ext-IO: lines from main memory into the global buffer
  input  logic              ext_gb_valid,
  input  logic              ext_gb_sel,
  input  logic [19:0]       ext_gb_addr,
  input  logic [LINE_W-1:0] ext_gb_data,
  output logic              ext_gb_ready,
  // Ext-IO: global buffer read-out
  input  logic              ext_rd_valid,
  input  logic              ext_rd_sel,
  input  logic [19:0]       ext_rd_addr,
  output logic              ext_rd_ready,
  output logic              ext_rd_data_valid,
  output logic [LINE_W-1:0] ext_rd_data,
  // PE commands
  input  logic              cmd_valid,
  input  logic [5:0]        cmd_pe,
  input  pe_cmd_t           cmd,
  output logic              cmd_ready,
  input  logic              inf_tick,
  // global buffer -> PE
  input  logic              gb_send_valid,
  input  logic              gb_send_sel,
  input  logic [19:0]       gb_send_addr,
  input  logic [5:0]        gb_send_pe,
  input  line_kind_e        gb_send_kind,
  input  logic [2:0]        gb_send_row,
  input  logic [6:0]        gb_send_paddr,
  output logic              gb_send_ready,
  // PE result -> ACC -> SFU -> global buffer
  input  logic              res_valid,
  input  logic [5:0]        res_pe,
  input  logic [3:0]        res_addr,
  input  logic [1:0]        res_col,
  input  logic              res_half,
  input  logic              res_first,
  input  logic              res_last,
  input  logic              relu_en,
  input  logic [4:0]        sfu_shift,
  input  logic [3:0]        pool_len,
  input  logic              res_dst_sel,
  input  logic [19:0]       res_dst_addr,
  output logic              res_ready,
  // transposing bank group geometry (key matrix N x M)
  input  logic              tcfg_valid,
  input  logic [11:0]       tcfg_rows,
  input  logic [11:0]       tcfg_cols,
  // faults
  output logic              fault_valid,
  output chip_fault_t       fault,
  input  logic              fault_pop,
  input  logic              resume,
  output logic              halt,
  output logic [31:0]       fault_count,
  output logic [31:0]       tbg_conflict_cycles
);
  // ---------------- network ----------------
  logic              src_valid [2];
  logic [5:0]        src_pe    [2];
  line_kind_e        src_kind  [2];
  logic [2:0]        src_row   [2];
  logic [6:0]        src_addr  [2];
  logic [LINE_W-1:0] src_line  [2];
  logic              src_ready [2];
  logic              pe_in_valid [NPE];
  logic              pe_in_ready [NPE];
  line_kind_e        n_kind;
  logic [2:0]        n_row;
  logic [6:0]        n_addr;
  logic [LINE_W-1:0] n_line;

  noc #(.NSRC(2), .NDST(NPE)) u_noc (
    .clk, .rst_n, .src_valid, .src_pe, .src_kind, .src_row, .src_addr, .src_line, .src_ready,
    .dst_valid(pe_in_valid), .dst_ready(pe_in_ready),
    .dst_kind(n_kind), .dst_row(n_row), .dst_addr(n_addr), .dst_line(n_line));

  assign src_valid[0] = mm_valid;
  assign src_pe[0]    = mm_pe;
  assign src_kind[0]  = mm_kind;
  assign src_row[0]   = mm_row;
  assign src_addr[0]  = mm_addr;
  assign src_line[0]  = mm_line;
  assign mm_ready     = src_ready[0];

  // ---------------- global buffer ----------------
  logic              gb_wr_valid, gb_wr_sel, gb_wr_ready;
  logic [19:0]       gb_wr_addr;
  logic [LINE_W-1:0] gb_wr_data;
  logic              gb_rd_valid, gb_rd_sel, gb_rd_dv;
  logic [19:0]       gb_rd_addr;
  logic [LINE_W-1:0] gb_rd_data;

  global_buffer #(.NLINES(GB_LINES)) u_gb (
    .clk, .rst_n, .tcfg_valid, .tcfg_rows, .tcfg_cols,
    .wr_valid(gb_wr_valid), .wr_sel(gb_wr_sel), .wr_addr(gb_wr_addr), .wr_data(gb_wr_data),
    .wr_ready(gb_wr_ready),
    .rd_valid(gb_rd_valid), .rd_sel(gb_rd_sel), .rd_addr(gb_rd_addr), .rd_data(gb_rd_data),
    .rd_data_valid(gb_rd_dv), .conflict_cycles(tbg_conflict_cycles));

  // read port: global buffer -> PE sends first, then Ext-IO read-out
  logic              gs_pend, gs_hold, ext_pend;
  logic [5:0]        gs_pe;
  line_kind_e        gs_kind;
  logic [2:0]        gs_row;
  logic [6:0]        gs_paddr;
  logic [LINE_W-1:0] gs_line;

  assign gb_send_ready = !gs_pend && !gs_hold;
  assign ext_rd_ready  = !gb_send_valid && gb_send_ready;
  always_comb begin
    gb_rd_valid = 1'b0; gb_rd_sel = ext_rd_sel; gb_rd_addr = ext_rd_addr;
    if (gb_send_valid && gb_send_ready) begin
      gb_rd_valid = 1'b1; gb_rd_sel = gb_send_sel; gb_rd_addr = gb_send_addr;
    end else if (ext_rd_valid && ext_rd_ready) gb_rd_valid = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      gs_pend <= 1'b0; gs_hold <= 1'b0; ext_pend <= 1'b0;
      gs_pe <= '0; gs_kind <= LK_DIRECT; gs_row <= '0; gs_paddr <= '0; gs_line <= '0;
    end else begin
      ext_pend <= ext_rd_valid && ext_rd_ready && !(gb_send_valid && gb_send_ready);
      if (gb_send_valid && gb_send_ready) begin
        gs_pend <= 1'b1; gs_pe <= gb_send_pe; gs_kind <= gb_send_kind;
        gs_row <= gb_send_row; gs_paddr <= gb_send_paddr;
      end
      if (gs_pend) begin gs_pend <= 1'b0; gs_hold <= 1'b1; gs_line <= gb_rd_data; end
      if (gs_hold && src_ready[1]) gs_hold <= 1'b0;
    end

  assign src_valid[1] = gs_hold;
  assign src_pe[1]    = gs_pe;
  assign src_kind[1]  = gs_kind;
  assign src_row[1]   = gs_row;
  assign src_addr[1]  = gs_paddr;
  assign src_line[1]  = gs_line;
  assign ext_rd_data_valid = ext_pend && gb_rd_dv;
  assign ext_rd_data       = gb_rd_data;

  // ---------------- PEs ----------------
  logic       pe_cmd_ready [NPE];
  logic       pe_fv  [NPE];
  pe_fault_t  pe_f   [NPE];
  logic       pe_fr  [NPE];
  psum_t      pe_out [NPE][PE_N][W_PER_ROW];
  logic       res_take;

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    pe #(.ROW_WR_CYC_P(ROW_WR_CYC_P), .ENDURANCE_MEAN(ENDURANCE_MEAN)) u_pe (
      .clk, .pe_id(6'(p)), .rst_n, .halt, .inf_tick,
      .in_valid(pe_in_valid[p]), .in_kind(n_kind), .in_row(n_row), .in_addr(n_addr),
      .in_line(n_line), .in_ready(pe_in_ready[p]),
      .cmd_valid(cmd_valid && int'(cmd_pe) == p), .cmd, .cmd_ready(pe_cmd_ready[p]),
      .out_re(res_take && int'(res_pe) == p), .out_raddr(res_addr), .out_rdata(pe_out[p]),
      .fault_valid(pe_fv[p]), .fault(pe_f[p]), .fault_ready(pe_fr[p]));
  end
  assign cmd_ready = pe_cmd_ready[cmd_pe];

  fault_monitor #(.NPE(NPE)) u_fm (
    .clk, .rst_n, .pe_valid(pe_fv), .pe_fault(pe_f), .pe_ready(pe_fr),
    .host_valid(fault_valid), .host_fault(fault), .host_pop(fault_pop), .resume,
    .halt, .fault_count);

  // ---------------- result path: PE -> ACC -> SFU -> global buffer ------
  logic        p1, acc_v, sfu_v;
  logic [5:0]  m_pe;
  logic [1:0]  m_col;
  logic        m_half, m_first, m_last, m_sel;
  logic [19:0] m_addr;
  logic        d_sel, e_sel;
  logic [19:0] d_addr, e_addr;
  psum_t       acc_in  [LINE_BYTES];
  psum_t       acc_out [LINE_BYTES];
  logic [7:0]  sfu_out [LINE_BYTES];
  logic        pipe_busy;

  assign pipe_busy = p1 || acc_v || sfu_v;
  assign res_ready = !pipe_busy && gb_wr_ready;
  assign res_take  = res_valid && res_ready;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      p1 <= 1'b0; m_pe <= '0; m_col <= '0; m_half <= 1'b0; m_first <= 1'b0; m_last <= 1'b0;
      m_sel <= 1'b0; m_addr <= '0; d_sel <= 1'b0; d_addr <= '0; e_sel <= 1'b0; e_addr <= '0;
    end else begin
      p1 <= res_take;
      if (res_take) begin
        m_pe <= res_pe; m_col <= res_col; m_half <= res_half;
        m_first <= res_first; m_last <= res_last; m_sel <= res_dst_sel; m_addr <= res_dst_addr;
      end
      d_sel <= m_sel; d_addr <= m_addr;   // aligned with the ACC output
      e_sel <= d_sel; e_addr <= d_addr;   // aligned with the SFU output
    end

  always_comb
    for (int l = 0; l < LINE_BYTES; l++)
      acc_in[l] = pe_out[m_pe][m_col][int'(m_half) * LINE_BYTES + l];

  logic acc_ov;
  acc_unit u_acc (.clk, .rst_n, .in_valid(p1), .in_first(m_first), .in_last(m_last),
                  .in_data(acc_in), .out_valid(acc_ov), .out_data(acc_out));
  assign acc_v = acc_ov;

  logic sfu_ov;
  sfu u_sfu (.clk, .rst_n, .relu_en, .shift(sfu_shift), .pool_len,
             .in_valid(acc_ov), .in_data(acc_out), .out_valid(sfu_ov), .out_data(sfu_out));
  assign sfu_v = sfu_ov;

  // global buffer write port: SFU results, else Ext-IO
  assign ext_gb_ready = !pipe_busy && !res_valid && gb_wr_ready;
  always_comb begin
    gb_wr_valid = 1'b0; gb_wr_sel = ext_gb_sel; gb_wr_addr = ext_gb_addr; gb_wr_data = ext_gb_data;
    if (sfu_ov) begin
      gb_wr_valid = 1'b1; gb_wr_sel = e_sel; gb_wr_addr = e_addr;
      for (int l = 0; l < LINE_BYTES; l++) gb_wr_data[8*l +: 8] = sfu_out[l];
    end else if (ext_gb_valid && ext_gb_ready) gb_wr_valid = 1'b1;
  end
endmodule

// pe: Processing Element. Contains PE_M x PE_N (6 x 4) APUs, one buffer per
// PE row, the shared shift register set, the mode mux in front of the
// buffers, the ADD array, the output buffer and the PE controller, wired as
// in the paper's PE diagram.
//
// Network side: a 16-byte line with in_kind = LK_DIRECT (weights) is
// written straight into buffer in_row at line in_addr, bypassing the shift
// registers; a line with LK_ACT (activations) goes to the shift register
// set, which after 8 lines (128 activations) writes 8 bit planes into buffer
// in_row at lines in_addr .. in_addr+7 (the row/address of the vector's last
// line are used). in_ready is low while the set emits planes.
// All APUs of a PE row share their buffer's read data (weights into the
// writing registers, bit planes into the input registers).
// Faults found by the APUs' program-and-verify are queued in the PE, one
// flag per APU, and leave one at a time on fault_valid/fault_ready.
// Commands are those of pe_controller. The port set is this design's own.
module pe
  import hamun_pkg::*;
#(
  parameter int              ROW_WR_CYC_P   = ROW_WR_CYC,
  parameter longint unsigned ENDURANCE_MEAN = 64'd2500000000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [5:0]        pe_id,     // instance number (seeds the crossbar models)
  input  logic              halt,
  input  logic              inf_tick,
  // network input
  input  logic              in_valid,
  input  line_kind_e        in_kind,
  input  logic [2:0]        in_row,
  input  logic [6:0]        in_addr,
  input  logic [LINE_W-1:0] in_line,
  output logic              in_ready,
  // commands
  input  logic              cmd_valid,
  input  pe_cmd_t           cmd,
  output logic              cmd_ready,
  // output buffer read
  input  logic              out_re,
  input  logic [3:0]        out_raddr,
  output psum_t             out_rdata [PE_N][W_PER_ROW],
  // fault reports
  output logic              fault_valid,
  output pe_fault_t         fault,
  input  logic              fault_ready
);
  // ---------------- shift register set + buffer mux ----------------
  logic               srs_in_ready, srs_valid;
  logic [2:0]         srs_idx;
  logic [XB_ROWS-1:0] srs_plane;
  logic [2:0]         act_row;
  logic [6:0]         act_addr;

  shift_register_set u_srs (
    .clk, .rst_n, .in_valid(in_valid && in_kind == LK_ACT), .in_line,
    .in_ready(srs_in_ready), .out_valid(srs_valid), .out_idx(srs_idx), .out_plane(srs_plane));

  assign in_ready = srs_in_ready;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin act_row <= '0; act_addr <= '0; end
    else if (in_valid && in_ready && in_kind == LK_ACT) begin
      act_row <= in_row; act_addr <= in_addr;
    end

  logic [PE_M-1:0]   buf_we;
  logic [6:0]        buf_waddr;
  logic [LINE_W-1:0] buf_wdata;
  always_comb begin
    buf_we = '0;
    if (srs_valid) begin
      buf_we[act_row] = 1'b1;
      buf_waddr = act_addr + 7'(srs_idx);
      buf_wdata = srs_plane;
    end else begin
      buf_we[in_row] = in_valid && in_ready && in_kind == LK_DIRECT;
      buf_waddr = in_addr;
      buf_wdata = in_line;
    end
  end

  // ---------------- controller ----------------
  logic              buf_re;
  logic [6:0]        buf_raddr;
  logic [LINE_W-1:0] buf_rdata [PE_M];
  logic [W_PER_ROW*W_BITS-1:0] wreg_data;
  logic              wreg_load [PE_M][PE_N];
  logic              mask_load [PE_M][PE_N];
  logic [XB_COLS-1:0] mask_data;
  logic [PE_M-1:0]   wr_start, wr_done, plane_valid, plane_ready, res_valid;
  logic [6:0]        wr_row;
  logic [2:0]        plane_idx;
  logic [1:0]        bit_rot;
  logic [6:0]        row_start;
  logic              add_valid;
  logic [PE_M-1:0]   row_en;
  logic [3:0]        out_addr;

  pe_controller u_ctrl (
    .clk, .rst_n, .halt, .inf_tick, .cmd_valid, .cmd, .cmd_ready,
    .bit_rot, .row_start, .buf_re, .buf_raddr, .buf_rdata,
    .wreg_data, .wreg_load, .mask_load, .mask_data, .wr_start, .wr_row, .wr_done,
    .plane_valid, .plane_idx, .plane_ready, .res_valid,
    .add_valid, .row_en, .out_addr);

  // ---------------- buffers and APU array ----------------
  psum_t     apu_res   [PE_M][PE_N][W_PER_ROW];
  logic      apu_fv    [PE_M][PE_N];
  fault_t    apu_f     [PE_M][PE_N];
  logic      apu_wdone [PE_M][PE_N];
  logic      apu_rdy   [PE_M][PE_N];
  logic      apu_rv    [PE_M][PE_N];

  for (genvar i = 0; i < PE_M; i++) begin : g_row
    pe_buffer u_buf (
      .clk, .we(buf_we[i]), .waddr(buf_waddr), .wdata(buf_wdata),
      .re(buf_re), .raddr(buf_raddr), .rdata(buf_rdata[i]));
    for (genvar j = 0; j < PE_N; j++) begin : g_col
      logic wbusy;
      apu #(.ROW_WR_CYC_P(ROW_WR_CYC_P), .ENDURANCE_MEAN(ENDURANCE_MEAN)) u_apu (
        .clk, .rst_n, .seed(16'(pe_id) * 16'(PE_M * PE_N) + 16'(i * PE_N + j + 1)), .bit_rot, .row_start,
        .wreg_load(wreg_load[i][j]), .wreg_data,
        .mask_load(mask_load[i][j]), .mask_data,
        .wr_start(wr_start[i]), .wr_row, .wr_busy(wbusy), .wr_done(apu_wdone[i][j]),
        .fault_valid(apu_fv[i][j]), .fault(apu_f[i][j]),
        .plane_valid(plane_valid[i]), .plane_bits(buf_rdata[i]), .plane_idx,
        .plane_ready(apu_rdy[i][j]), .res_valid(apu_rv[i][j]), .res(apu_res[i][j]));
    end
    // all APUs of a row run in lock step; column 0 speaks for the row
    assign wr_done[i]     = apu_wdone[i][0];
    assign plane_ready[i] = apu_rdy[i][0];
    assign res_valid[i]   = apu_rv[i][0];
  end

  // ---------------- ADD array and output buffer ----------------
  logic  sum_valid;
  psum_t sum [PE_N][W_PER_ROW];
  add_array u_add (.clk, .rst_n, .in_valid(add_valid), .row_en, .in(apu_res),
                   .out_valid(sum_valid), .out(sum));

  logic [3:0] out_addr_q;
  always_ff @(posedge clk) out_addr_q <= out_addr;

  output_buffer u_obuf (.clk, .we(sum_valid), .waddr(out_addr_q), .wdata(sum),
                        .re(out_re), .raddr(out_raddr), .rdata(out_rdata));

  // ---------------- fault queue ----------------
  logic   pend_v [PE_M][PE_N];
  fault_t pend_f [PE_M][PE_N];
  logic [2:0] sel_i;
  logic [1:0] sel_j;
  always_comb begin
    fault_valid = 1'b0; sel_i = '0; sel_j = '0;
    for (int i = PE_M - 1; i >= 0; i--)
      for (int j = PE_N - 1; j >= 0; j--)
        if (pend_v[i][j]) begin fault_valid = 1'b1; sel_i = 3'(i); sel_j = 2'(j); end
    fault.apu_row = sel_i;
    fault.apu_col = sel_j;
    fault.f       = pend_f[sel_i][sel_j];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < PE_M; i++)
        for (int j = 0; j < PE_N; j++) begin pend_v[i][j] <= 1'b0; pend_f[i][j] <= '0; end
    end else begin
      if (fault_valid && fault_ready) pend_v[sel_i][sel_j] <= 1'b0;
      for (int i = 0; i < PE_M; i++)
        for (int j = 0; j < PE_N; j++)
          if (apu_fv[i][j]) begin pend_v[i][j] <= 1'b1; pend_f[i][j] <= apu_f[i][j]; end
    end
endmodule

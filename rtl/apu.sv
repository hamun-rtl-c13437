// apu: Analog Processing Unit, the compute tile of a PE.
//
// Holds one 128x128 ReRAM crossbar (2-bit cells, four cells per 8-bit
// weight, so 32 weights per row) and the digital logic around it: the input
// register, the writing register, the mask register, the controller that
// drives the column-select mux, a pool of 16 ADCs, the local row buffer
// (32 partial-sum accumulators) and the add/sub units that shift and add
// ADC codes across cells and activation bits.
//
// Weight writing (wr_start, 6000 cycles per row by default): the writing
// register (32 weights) is written into one crossbar row with program and
// verify. Phase 1 applies up to PV_PULSES increase pulses, phase 2 up to
// PV_PULSES decrease pulses; before every pulse the verify read decides
// which SL drivers to enable, and SL drivers of masked columns stay off.
// A column still away from its target when the row ends holds a stuck
// (worn-out) cell: its position is reported on fault_valid/fault together
// with wr_done. The row write always lasts ROW_WR_CYC cycles (the paper's
// row writing latency), the pulses being spread evenly over that window.
//
// Computation: the activations arrive bit-serially, one 128-bit bit plane
// per plane_valid (plane_idx 0 = LSB, 7 = MSB, two's complement so the MSB
// plane is subtracted). Each plane takes XB_READ_CYC cycles of crossbar
// read ending in a sample-and-hold, then 8 conversion steps in which ADC a
// reads column 16*g + a (g = step); masked columns are skipped (contribute
// nothing). 8 planes x (4 + 8) = 96 cycles, the paper's crossbar
// computation latency; res_valid pulses the cycle after the last step, and res holds the
// 32 results until the next dot product ends.
// A new plane is accepted when plane_ready is high.
//
// Crossbar-level wear leveling (paper Fig. 10): with rotation rot, cell q of
// a weight stores bit pair (q + rot) mod 4, and logical row l is stored in
// physical row (l + start) mod 128; the input register and the ADC shift
// amounts follow the same maps. rot and start are taken at wr_start and
// kept for computation. Which column each ADC serves per step, the read
// settle time and the pulse counts are this design's choices; the paper
// gives the blocks, the 16 ADCs, the 6-bit precision and the latencies.
// The seed input only selects the endurance spread of the crossbar model.
module apu
  import hamun_pkg::*;
#(
  parameter int              ROW_WR_CYC_P   = ROW_WR_CYC,
  parameter int              PV_PULSES      = (1 << CELL_BITS) - 1,
  parameter longint unsigned ENDURANCE_MEAN = 64'd2500000000
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [15:0]              seed,      // endurance spread of the crossbar model
  // wear-leveling state for the next row write
  input  logic [1:0]               bit_rot,
  input  logic [6:0]               row_start,
  // registers
  input  logic                     wreg_load,
  input  logic [W_PER_ROW*W_BITS-1:0] wreg_data,
  input  logic                     mask_load,
  input  logic [XB_COLS-1:0]       mask_data,
  // row write
  input  logic                     wr_start,
  input  logic [6:0]               wr_row,
  output logic                     wr_busy,
  output logic                     wr_done,
  output logic                     fault_valid,
  output fault_t                   fault,
  // computation
  input  logic                     plane_valid,
  input  logic [XB_ROWS-1:0]       plane_bits,
  input  logic [2:0]               plane_idx,
  output logic                     plane_ready,
  output logic                     res_valid,
  output psum_t                    res [W_PER_ROW]
);
  localparam int SLOT = ROW_WR_CYC_P / (2 * PV_PULSES);

  // ---------------- registers ----------------
  logic [W_PER_ROW*W_BITS-1:0] wreg;
  logic [XB_COLS-1:0]          mask;
  logic [XB_ROWS-1:0]          inreg;
  logic [1:0]                  cur_rot;
  logic [6:0]                  cur_start;

  // ---------------- crossbar ----------------
  logic [6:0]           xb_row;
  logic                 xb_pulse, xb_dec, sh_sample;
  logic [XB_COLS-1:0]   sl_en;
  logic [CELL_BITS-1:0] vfy [XB_COLS];
  logic [8:0]           col_v [XB_COLS];

  reram_crossbar #(.ENDURANCE_MEAN(ENDURANCE_MEAN)) u_xb (
    .clk, .seed, .wr_row(xb_row), .wr_pulse(xb_pulse), .wr_dec(xb_dec), .sl_en,
    .vfy_level(vfy), .wl_in(inreg), .sh_sample, .col_out(col_v));

  // target level of every column from the writing register (bit remap)
  logic [CELL_BITS-1:0] target [XB_COLS];
  always_comb
    for (int c = 0; c < XB_COLS; c++) begin
      logic [1:0] s;
      s = 2'((c % CELLS_PER_W) + int'(cur_rot));
      target[c] = wreg[(c / CELLS_PER_W) * W_BITS + 2 * s +: 2];
    end

  // ---------------- write controller ----------------
  logic        wr_act;
  logic [31:0] wcnt;
  logic [XB_COLS-1:0] need_inc, need_dec, bad;
  always_comb
    for (int c = 0; c < XB_COLS; c++) begin
      need_inc[c] = !mask[c] && (vfy[c] < target[c]);
      need_dec[c] = !mask[c] && (vfy[c] > target[c]);
      bad[c]      = need_inc[c] || need_dec[c];
    end

  // pulse k (0 .. 2*PV_PULSES-1) fires in the middle of slot k, so the
  // verify read after the last pulse has settled before the row ends
  logic pulse_now, in_dec_phase;
  always_comb begin
    pulse_now    = wr_act && (wcnt % SLOT == SLOT / 2) && (wcnt / SLOT < 2 * PV_PULSES);
    in_dec_phase = (wcnt / SLOT) >= PV_PULSES;
    xb_pulse     = pulse_now;
    xb_dec       = in_dec_phase;
    sl_en        = in_dec_phase ? need_dec : need_inc;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wreg <= '0; mask <= '0; cur_rot <= '0; cur_start <= '0;
      wr_act <= 1'b0; wcnt <= '0; xb_row <= '0;
      wr_done <= 1'b0; fault_valid <= 1'b0; fault <= '0;
    end else begin
      wr_done     <= 1'b0;
      fault_valid <= 1'b0;
      if (wreg_load) wreg <= wreg_data;
      if (mask_load) mask <= mask_data;
      if (wr_start && !wr_act) begin
        wr_act    <= 1'b1;
        wcnt      <= '0;
        cur_rot   <= bit_rot;
        cur_start <= row_start;
        xb_row    <= 7'(int'(wr_row) + int'(row_start));
      end else if (wr_act) begin
        wcnt <= wcnt + 1;
        if (wcnt == 32'(ROW_WR_CYC_P - 1)) begin
          wr_act      <= 1'b0;
          wr_done     <= 1'b1;
          fault_valid <= |bad;
          fault.row   <= xb_row;
          fault.cols  <= bad;
        end
      end
    end
  assign wr_busy = wr_act;

  // ---------------- compute controller ----------------
  typedef enum logic [1:0] {C_IDLE, C_READ, C_CONV} cst_e;
  cst_e        cst;
  logic [2:0]  ccnt;       // read cycle / conversion step
  logic [2:0]  cur_bit;
  logic [ADC_BITS-1:0] adc_code [N_ADC];
  psum_t       acc [W_PER_ROW];

  assign plane_ready = (cst == C_IDLE) || (cst == C_CONV && ccnt == 3'(ADC_STEPS - 1));
  assign sh_sample   = (cst == C_READ) && (ccnt == 3'(XB_READ_CYC - 1));

  // analog mux + ADC pool: ADC a converts column 16*g + a at step g
  for (genvar a = 0; a < N_ADC; a++) begin : g_adc
    adc #(.ADC_BITS(ADC_BITS)) u_adc (.ain(col_v[int'(ccnt) * N_ADC + a]), .code(adc_code[a]));
  end

  // add/sub units: shift each code by its bit-pair and activation-bit
  // weight; the first step of bit 0 starts from zero (new dot product)
  psum_t acc_next [W_PER_ROW];
  always_comb begin
    for (int k = 0; k < W_PER_ROW; k++)
      acc_next[k] = (cur_bit == 3'd0 && ccnt == 3'd0) ? '0 : acc[k];
    for (int a = 0; a < N_ADC; a++) begin
      int c, s;
      logic [4:0] k;
      psum_t term;
      c = int'(ccnt) * N_ADC + a;
      k = 5'(c / CELLS_PER_W);
      s = ((c % CELLS_PER_W) + int'(cur_rot)) % CELLS_PER_W;
      term = mask[c] ? '0 : psum_t'(adc_code[a]) <<< (2 * s + int'(cur_bit));
      if (cur_bit == 3'(ACT_BITS - 1)) acc_next[k] = acc_next[k] - term;
      else                             acc_next[k] = acc_next[k] + term;
    end
  end

  logic conv_en;
  assign conv_en = (cst == C_CONV);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cst <= C_IDLE; ccnt <= '0; cur_bit <= '0; inreg <= '0; res_valid <= 1'b0;
      for (int k = 0; k < W_PER_ROW; k++) begin acc[k] <= '0; res[k] <= '0; end
    end else begin
      res_valid <= 1'b0;
      if (conv_en) begin
        for (int k = 0; k < W_PER_ROW; k++) acc[k] <= acc_next[k];
        if (cur_bit == 3'(ACT_BITS - 1) && ccnt == 3'(ADC_STEPS - 1)) begin
          res_valid <= 1'b1;
          for (int k = 0; k < W_PER_ROW; k++) res[k] <= acc_next[k];
        end
      end
      if (plane_valid && plane_ready) begin
        // input register, reordered for the row-shift wear leveling
        for (int p = 0; p < XB_ROWS; p++)
          inreg[p] <= plane_bits[7'(p - int'(cur_start))];
        cur_bit <= plane_idx;
        cst     <= C_READ;
        ccnt    <= '0;
      end else begin
        case (cst)
          C_READ: begin
            ccnt <= ccnt + 1'b1;
            if (ccnt == 3'(XB_READ_CYC - 1)) begin cst <= C_CONV; ccnt <= '0; end
          end
          C_CONV: begin
            ccnt <= ccnt + 1'b1;
            if (ccnt == 3'(ADC_STEPS - 1)) cst <= C_IDLE;
          end
          default: ;
        endcase
      end
    end
endmodule

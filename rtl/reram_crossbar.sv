// reram_crossbar: BEHAVIOURAL MODEL (not synthesizable logic) of a 128x128
// crossbar of 1T1R ReRAM cells with its WL/BL drivers, SL drivers and
// sample-and-hold stage.
//
// Each cell stores one of four conductance levels (2 bits). Computation:
// the wordline inputs wl_in are the current activation bit of every row; on
// sh_sample the column currents sum_i wl_in[i] * level[i][c] are captured by
// the sample-and-hold into col_out (one clock later), which the ADCs read.
// Writing follows the row-by-row, two-polarity scheme: wr_row selects the
// row (WL driver), wr_dec gives the BL polarity (0 = increase step,
// 1 = decrease step), and each wr_pulse applies one programming pulse to
// every column whose SL driver is enabled in sl_en, moving its level one
// step. vfy_level is the verify read of the selected row, valid at all times.
//
// Wear-out: every programming pulse a cell receives counts against its
// endurance; once the count reaches it, the cell is stuck at its current
// level and ignores further pulses, as the paper's P&V detection assumes.
// Endurance is spread around ENDURANCE_MEAN with a coefficient of variation
// of COV_PCT percent (the paper uses a normal distribution with mean 2.5e9
// and CoV 0.2; this model draws a uniform spread with the same mean and
// spread from a fixed hash of the cell position and the instance's seed
// input, so that runs repeat). Wear counts are 32 bits (the largest
// endurance, 2.5e9 * (1 + 0.2 * sqrt(3)), fits).
// One pulse per level step is this model's simplification of the
// incremental pulse train of P&V. Cells start at level 0.
module reram_crossbar
  import hamun_pkg::*;
#(
  parameter longint unsigned ENDURANCE_MEAN = 64'd2500000000,
  parameter int unsigned     COV_PCT        = 20
) (
  input  logic                  clk,
  input  logic [15:0]           seed,
  // write path
  input  logic [6:0]            wr_row,
  input  logic                  wr_pulse,
  input  logic                  wr_dec,
  input  logic [XB_COLS-1:0]    sl_en,
  output logic [CELL_BITS-1:0]  vfy_level [XB_COLS],
  // compute path
  input  logic [XB_ROWS-1:0]    wl_in,
  input  logic                  sh_sample,
  output logic [8:0]            col_out   [XB_COLS]
);
  logic [CELL_BITS-1:0] level [XB_ROWS][XB_COLS];
  logic [31:0]          wear  [XB_ROWS][XB_COLS];
  logic [31:0]          row_limit [XB_COLS];

  function automatic logic [31:0] endurance_of(int r, int c, logic [15:0] sd);
    longint unsigned h, half, span;
    h = longint'(r * 7919 + c * 104729) + longint'(sd) * 15485863;
    h = (h ^ (h >> 7)) * 64'd2654435761;
    h = h ^ (h >> 13);
    // uniform spread with std = mean * CoV: half width = mean * CoV * sqrt(3)
    half = ENDURANCE_MEAN * COV_PCT * 1732 / 100000;
    span = 2 * half + 1;
    return 32'(ENDURANCE_MEAN - half + (h % span));
  endfunction

  // endurance of the cells of the selected row
  always_comb
    for (int c = 0; c < XB_COLS; c++) row_limit[c] = endurance_of(int'(wr_row), c, seed);

  initial begin
    for (int r = 0; r < XB_ROWS; r++)
      for (int c = 0; c < XB_COLS; c++) begin
        level[r][c] = '0;
        wear[r][c]  = '0;
      end
    for (int c = 0; c < XB_COLS; c++) col_out[c] = '0;
  end

  always_comb
    for (int c = 0; c < XB_COLS; c++) vfy_level[c] = level[wr_row][c];

  always_ff @(posedge clk) begin
    if (wr_pulse) begin
      for (int c = 0; c < XB_COLS; c++) begin
        if (sl_en[c]) begin
          if (wear[wr_row][c] < row_limit[c]) begin
            wear[wr_row][c] <= wear[wr_row][c] + 1;
            if (!wr_dec && level[wr_row][c] != '1)
              level[wr_row][c] <= level[wr_row][c] + 1'b1;
            else if (wr_dec && level[wr_row][c] != '0)
              level[wr_row][c] <= level[wr_row][c] - 1'b1;
          end
        end
      end
    end
    if (sh_sample) begin
      for (int c = 0; c < XB_COLS; c++) begin
        logic [8:0] s;
        s = '0;
        for (int r = 0; r < XB_ROWS; r++)
          if (wl_in[r]) s = s + 9'(level[r][c]);
        col_out[c] <= s;
      end
    end
  end
endmodule

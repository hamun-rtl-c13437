// transpose_bank_group: the transposing bank group (BG^T) of the global
// buffer. It stores a row-major N x M matrix (the key matrix K, produced
// token by token) so that reading it entry by entry yields K^T, with no
// separate transposition pass.
//
// Structure (paper): 16 banks one byte wide and a 16-byte swapping register.
// A 16-byte write transaction carries consecutive elements of one matrix
// row (a row is cut into 16-byte transactions; the last one of a row may be
// shorter when M is not a multiple of 16). For the element with flat index
// alpha = r*M + c the unit computes its index in the transposed matrix,
//     P(alpha) = N*alpha mod (MN-1)  (P = MN-1 for alpha = MN-1),
// which equals c*N + r, and stores it in bank id = P mod 16 at entry
// P div 16. The swapping register reorders the 16 elements so that each
// lines up with its bank, and all are written together. Reading entry e
// returns transposed elements 16e .. 16e+15, bank b holding 16e + b.
//
// This design tracks r and c with counters (reset by cfg_valid, which also
// sets N and M) instead of dividing alpha, and computes P = c*N + r per
// lane. When N is even, two lanes of one transaction can fall in the same
// bank; the paper writes all lanes at once and does not discuss this case.
// Here the swapping register then drains over several cycles, writing every
// cycle the lowest pending lane of each bank, and wr_ready stays low
// meanwhile (conflict_cycles counts those extra cycles). Reads have one
// cycle of latency. DEPTH entries per bank is this design's choice.
module transpose_bank_group
  import hamun_pkg::*;
#(
  parameter int BANKS = TB_BANKS,
  parameter int DEPTH = 2048,
  parameter int DIM_W = 12
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // matrix geometry; resets the row/column position
  input  logic                     cfg_valid,
  input  logic [DIM_W-1:0]         cfg_rows,   // N
  input  logic [DIM_W-1:0]         cfg_cols,   // M
  // write: one transaction of consecutive row elements
  input  logic                     wr_valid,
  input  logic [7:0]               wr_data [BANKS],
  output logic                     wr_ready,
  // read: one entry of every bank
  input  logic                     rd_valid,
  input  logic [$clog2(DEPTH)-1:0] rd_entry,
  output logic [7:0]               rd_data [BANKS],
  output logic [31:0]              conflict_cycles
);
  localparam int EW = $clog2(DEPTH);
  localparam int BW = $clog2(BANKS);

  logic [7:0]       mem [BANKS][DEPTH];
  logic [DIM_W-1:0] n_q, m_q, r_q, c_q;

  // swapping register: elements with their transposed positions
  logic [7:0]          sw_data [BANKS];
  logic [2*DIM_W-1:0]  sw_p    [BANKS];
  logic [BANKS-1:0]    pend;

  // grant: per bank the lowest pending lane mapped to it
  logic [BANKS-1:0] grant;
  logic [BW-1:0]    lane_of [BANKS];
  logic [BANKS-1:0] bank_hit;
  always_comb begin
    grant = '0;
    bank_hit = '0;
    for (int b = 0; b < BANKS; b++) lane_of[b] = '0;
    for (int l = 0; l < BANKS; l++) begin
      int b;
      b = int'(sw_p[l] % BANKS);
      if (pend[l] && !bank_hit[b]) begin
        bank_hit[b] = 1'b1;
        lane_of[b]  = BW'(l);
        grant[l]    = 1'b1;
      end
    end
  end
  assign wr_ready = ((pend & ~grant) == '0);

  // lanes of the incoming transaction
  int unsigned lanes;
  always_comb begin
    lanes = int'(m_q) - int'(c_q);
    if (lanes > BANKS) lanes = BANKS;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      n_q <= '0; m_q <= '0; r_q <= '0; c_q <= '0; pend <= '0; conflict_cycles <= '0;
      for (int l = 0; l < BANKS; l++) begin sw_data[l] <= '0; sw_p[l] <= '0; end
    end else begin
      // drain the swapping register into the banks
      for (int b = 0; b < BANKS; b++)
        if (bank_hit[b])
          mem[b][EW'(sw_p[lane_of[b]] / BANKS)] <= sw_data[lane_of[b]];
      pend <= pend & ~grant;
      if (!wr_ready) conflict_cycles <= conflict_cycles + 1;

      if (cfg_valid) begin
        n_q <= cfg_rows; m_q <= cfg_cols; r_q <= '0; c_q <= '0;
      end else if (wr_valid && wr_ready) begin
        for (int l = 0; l < BANKS; l++) begin
          sw_data[l] <= wr_data[l];
          sw_p[l]    <= (2*DIM_W)'((int'(c_q) + l) * int'(n_q) + int'(r_q));
        end
        for (int l = 0; l < BANKS; l++) pend[l] <= (l < int'(lanes));
        if (int'(c_q) + int'(lanes) >= int'(m_q)) begin
          c_q <= '0; r_q <= r_q + 1'b1;
        end else c_q <= c_q + DIM_W'(lanes);
      end
    end

  always_ff @(posedge clk)
    if (rd_valid)
      for (int b = 0; b < BANKS; b++) rd_data[b] <= mem[b][rd_entry];
endmodule

// shift_register_set: serialises activations for the bit-serial crossbars.
// It collects a vector of 128 8-bit activations arriving as 8 lines of 16
// bytes (byte b of line l is activation 16*l + b), then shifts all 128
// registers right once per cycle for 8 cycles, emitting one 128-bit bit
// plane per cycle (LSB plane first, out_idx = bit number) to be written
// into a PE-row buffer. While it emits, in_ready is low. One set is shared
// by all PE rows of a PE, as in the paper; the handshake and the
// line-to-activation order are this design's choices.
module shift_register_set
  import hamun_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [LINE_W-1:0] in_line,
  output logic              in_ready,
  output logic              out_valid,
  output logic [2:0]        out_idx,
  output logic [XB_ROWS-1:0] out_plane
);
  localparam int LINES_PER_VEC = XB_ROWS / LINE_BYTES;  // 8
  logic [ACT_BITS-1:0] sr [XB_ROWS];
  logic [2:0]          lcnt;
  logic                emit;

  assign in_ready  = !emit;
  assign out_valid = emit;
  always_comb
    for (int r = 0; r < XB_ROWS; r++) out_plane[r] = sr[r][0];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      lcnt <= '0; emit <= 1'b0; out_idx <= '0;
      for (int r = 0; r < XB_ROWS; r++) sr[r] <= '0;
    end else if (emit) begin
      for (int r = 0; r < XB_ROWS; r++) sr[r] <= sr[r] >> 1;
      out_idx <= out_idx + 1'b1;
      if (out_idx == 3'(ACT_BITS - 1)) begin emit <= 1'b0; out_idx <= '0; end
    end else if (in_valid) begin
      for (int b = 0; b < LINE_BYTES; b++)
        sr[int'(lcnt) * LINE_BYTES + b] <= in_line[8*b +: 8];
      lcnt <= lcnt + 1'b1;
      if (lcnt == 3'(LINES_PER_VEC - 1)) begin emit <= 1'b1; lcnt <= '0; end
    end
endmodule

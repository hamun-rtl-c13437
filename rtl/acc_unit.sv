// acc_unit: the chip-level accumulation unit (ACC). When a layer is spread
// over several PEs, each PE returns partial sums for the same output
// neurons; the ACC adds them. It works on LANES partial sums per step:
// in_first starts a new sum, in_last closes it and presents the total on
// out_data with out_valid one cycle later. A sum made of one PE's result
// only has in_first and in_last both set. The lane count is this design's
// choice (one 16-byte line of 8-bit outputs after the SFU).
module acc_unit
  import hamun_pkg::*;
#(
  parameter int LANES = LINE_BYTES
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  logic  in_last,
  input  psum_t in_data  [LANES],
  output logic  out_valid,
  output psum_t out_data [LANES]
);
  psum_t acc [LANES];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) begin acc[l] <= '0; out_data[l] <= '0; end
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) begin
          psum_t s;
          s = (in_first ? '0 : acc[l]) + in_data[l];
          acc[l] <= s;
          if (in_last) out_data[l] <= s;
        end
        out_valid <= in_last;
      end
    end
endmodule

// sfu: Special Function Unit, applied to finished dot products before they
// are stored in the global buffer. Per lane it
//   1. optionally applies ReLU (relu_en),
//   2. rescales the sum to 8 bits: arithmetic shift right by `shift`,
//      then saturation to the signed 8-bit range,
//   3. optionally max-pools over pool_len consecutive input vectors
//      (pool_len = 1: no pooling); out_valid marks the end of each window.
// Output is one 16-byte line, one cycle after the input closing the window.
// The paper lists pooling, non-linear activation (sigmoid, ReLU) and
// normalisation as SFU duties without giving the circuits; this unit builds
// ReLU, requantisation and max pooling only.
module sfu
  import hamun_pkg::*;
#(
  parameter int LANES = LINE_BYTES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        relu_en,
  input  logic [4:0]  shift,
  input  logic [3:0]  pool_len,
  input  logic        in_valid,
  input  psum_t       in_data [LANES],
  output logic        out_valid,
  output logic [7:0]  out_data [LANES]
);
  logic signed [7:0] q [LANES];
  always_comb
    for (int l = 0; l < LANES; l++) begin
      psum_t v;
      v = in_data[l];
      if (relu_en && v < 0) v = '0;
      v = v >>> shift;
      if (v > 127)       q[l] = 8'sd127;
      else if (v < -128) q[l] = -8'sd128;
      else               q[l] = 8'(v);
    end

  logic signed [7:0] mx [LANES];
  logic [3:0]        cnt;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cnt <= '0; out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) begin mx[l] <= '0; out_data[l] <= '0; end
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        for (int l = 0; l < LANES; l++) begin
          logic signed [7:0] m;
          m = (cnt == 0 || q[l] > mx[l]) ? q[l] : mx[l];
          mx[l] <= m;
          out_data[l] <= m;
        end
        if (cnt + 1'b1 >= pool_len) begin cnt <= '0; out_valid <= 1'b1; end
        else cnt <= cnt + 1'b1;
      end
    end
endmodule

// add_array: the PE's ADD array, one accumulation module per APU column.
// When a layer's input is longer than one crossbar column (128), it spans
// several PE rows; module j then adds the 32 partial sums of APU(i, j) over
// the PE rows i enabled in row_en. The result is registered: out_valid
// follows in_valid by one cycle. Registering the sum is this design's
// choice.
module add_array
  import hamun_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [PE_M-1:0] row_en,
  input  psum_t           in  [PE_M][PE_N][W_PER_ROW],
  output logic            out_valid,
  output psum_t           out [PE_N][W_PER_ROW]
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int j = 0; j < PE_N; j++)
        for (int k = 0; k < W_PER_ROW; k++) out[j][k] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int j = 0; j < PE_N; j++)
          for (int k = 0; k < W_PER_ROW; k++) begin
            psum_t s;
            s = '0;
            for (int i = 0; i < PE_M; i++)
              if (row_en[i]) s = s + in[i][j][k];
            out[j][k] <= s;
          end
    end
endmodule

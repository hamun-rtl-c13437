// output_buffer: the PE's output buffer of partial sums. Each entry holds
// the 4 x 32 sums the ADD array produces for one dot product (one per
// output neuron mapped to the PE). One write port from the ADD array and a
// read port with a one-cycle registered read towards the network. The
// depth (OBUF_DEPTH) is this design's choice; the paper does not size it.
module output_buffer
  import hamun_pkg::*;
#(
  parameter int DEPTH = OBUF_DEPTH
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  psum_t                    wdata [PE_N][W_PER_ROW],
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output psum_t                    rdata [PE_N][W_PER_ROW]
);
  localparam int EW = PE_N * W_PER_ROW * PSUM_W;
  logic [EW-1:0] mem [DEPTH];
  logic [EW-1:0] wflat, rflat;
  always_comb begin
    for (int j = 0; j < PE_N; j++)
      for (int k = 0; k < W_PER_ROW; k++) begin
        wflat[(j * W_PER_ROW + k) * PSUM_W +: PSUM_W] = wdata[j][k];
        rdata[j][k] = rflat[(j * W_PER_ROW + k) * PSUM_W +: PSUM_W];
      end
  end
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wflat;
    if (re) rflat <= mem[raddr];
  end
endmodule

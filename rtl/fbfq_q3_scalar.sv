// fbfq_q3_scalar: Q3 Scalar Unit. Applies the Q3_K block scales to the block
// dot products of one super-block and sums them:
//   isum = sum over blocks b of (scale_b - 32) * dot_b
// where scale_b is the unpacked 6-bit block scale. first marks block 0 of a
// super-block and restarts the sum. The sum is registered: isum holds the
// total one cycle after the last block's in_valid. The offset of 32 is the
// GGUF definition of the Q3_K scales. The scale arrives in the cache's 8-bit
// w_scales field; its two top bits are always zero for Q3_K and are unused.
module fbfq_q3_scalar (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               first,
  input  logic signed [15:0] dot,
  input  logic [7:0]         scale,
  output logic signed [31:0] isum
);
  wire signed [6:0]  sc   = $signed({1'b0, scale[5:0]}) - 7'sd32;
  wire signed [31:0] term = 32'(sc) * 32'(dot);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        isum <= '0;
    else if (in_valid) isum <= (first ? 32'sd0 : isum) + term;
  end

endmodule

// fbfq_q2_scalar: Q2 Scalar Unit. For one super-block of Q2_K weights it
// forms the two integer sums the Q2_K dot product needs:
//   isum = sum over blocks b of scale_b * dot_b        (scale = low nibble)
//   msum = sum over blocks b of min_b   * bsum_b       (min   = high nibble)
// where bsum_b is the stored int16 sum of the 16 inputs of block b. The
// result of the super-block is later d*yd*isum - dmin*yd*msum. first restarts
// both sums; they are registered and hold the totals one cycle after the last
// block's in_valid. The split into scale and minimum follows the GGUF Q2_K
// definition.
module fbfq_q2_scalar (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               first,
  input  logic signed [15:0] dot,
  input  logic [7:0]         scale,
  input  logic signed [15:0] bsum,
  output logic signed [31:0] isum,
  output logic signed [31:0] msum
);
  wire signed [31:0] iterm = 32'($signed({1'b0, scale[3:0]})) * 32'(dot);
  wire signed [31:0] mterm = 32'($signed({1'b0, scale[7:4]})) * 32'(bsum);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      isum <= '0;
      msum <= '0;
    end else if (in_valid) begin
      isum <= (first ? 32'sd0 : isum) + iterm;
      msum <= (first ? 32'sd0 : msum) + mterm;
    end
  end

endmodule

// fbfq_vector_engine: the common dot-product engine of the Q2-Q3 Vector
// Compute Unit. Each cycle it multiplies one block of LANES weights with
// LANES int8 inputs and sums the products.
//
// The weight of lane i is formed from the two weight buffers:
//   Q3_K: q = w_high - (w_low ? 0 : 4)   (3-bit signed, -4..3)
//   Q2_K: q = w_high                     (0..3)
// so one signed 3-bit x 8-bit multiplier array and one adder tree serve both
// variants. The result is registered: dot/out_valid appear one cycle after
// in_valid. Sharing one engine between the variants follows the source
// description; the weight decoding is the GGUF definition of the formats.
module fbfq_vector_engine
  import fbfq_pkg::*;
#(
  parameter int unsigned LANES = BLK
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  wtype_e                       wtype,
  input  logic [LANES-1:0][1:0]        w_high,
  input  logic [LANES-1:0]             w_low,
  input  logic [LANES-1:0][7:0]        x,
  output logic                         out_valid,
  output logic signed [15:0]           dot
);
  logic signed [3:0]  q   [LANES];
  logic signed [10:0] prod[LANES];
  logic signed [15:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < LANES; i++) begin
      if (wtype == WT_Q3) q[i] = $signed({2'b00, w_high[i]}) - (w_low[i] ? 4'sd0 : 4'sd4);
      else                q[i] = $signed({2'b00, w_high[i]});
      prod[i] = 11'(q[i]) * 11'($signed(x[i]));
      sum     = sum + 16'(prod[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      dot       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) dot <= sum;
    end
  end

endmodule

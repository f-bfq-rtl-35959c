// fbfq_bit_slicer: cuts one buffered super-block into the fields the SB caches
// store, for the block selected by blk (0..15). Purely combinational.
//
// kind selects the layout (GGUF K-quant layouts, see fbfq_pkg):
//   SB_Q2: w_high = the 2-bit weights, w_scales = {min nibble, scale nibble},
//          sb_scale = d, sb_min = dmin. w_low is zero.
//   SB_Q3: w_high = low 2 bits of each 3-bit weight, w_low = its hmask bit,
//          w_scales = the unpacked 6-bit scale (still offset by 32),
//          sb_scale = d.
//   SB_Q8: i_data = the 16 int8 inputs, i_bsums = their stored int16 sum,
//          i_scale = the fp32 scale.
// In Q2_K and Q3_K, block b covers weights 16b..16b+15; these come from bytes
// 32n+l of qs at bit shift 2j, with n = b/8, j = (b mod 8)/2, l = 16(b mod 2)+i,
// and the Q3_K high bit from hmask byte l, bit 4n+j.
// The field names follow the SB cache buffers of the published block diagram
// (w_low 1-bit, w_high 2-bit, w_scales 8-bit, sb_scales/sb_mins 16-bit, i_data
// 8-bit, i_bsums 16-bit, i_scales 32-bit); the byte layout is the GGUF one.
module fbfq_bit_slicer
  import fbfq_pkg::*;
#(
  parameter int unsigned SB_BYTES = MAX_SB_BYTES
) (
  input  logic [SB_BYTES-1:0][7:0] sb,
  input  sbkind_e                  kind,
  input  logic [3:0]               blk,
  output w_row_t                   wrow,
  output i_row_t                   irow,
  output logic [15:0]              sb_scale,
  output logic [15:0]              sb_min,
  output logic [31:0]              i_scale
);
  logic [2:0] n4j;     // 4n + j
  logic [3:0] shift;   // 2j
  logic [8:0] qbase;   // 32n + 16(b mod 2)
  logic [4:0] lbase;   // 16(b mod 2)
  logic [7:0] qb, hb;
  logic [3:0] s_lo;    // low 4 bits of a Q3_K block scale
  logic [1:0] s_hi;    // high 2 bits

  always_comb begin
    n4j   = {blk[3], blk[2:1]};
    shift = {1'b0, blk[2:1], 1'b0};
    lbase = {blk[0], 4'd0};
    qbase = {3'd0, blk[3], blk[0], 4'd0};
    wrow     = '0;
    irow     = '0;
    sb_scale = '0;
    sb_min   = '0;
    i_scale  = '0;
    s_lo     = '0;
    s_hi     = '0;
    case (kind)
      SB_Q2: begin
        for (int i = 0; i < BLK; i++) begin
          qb = sb[16 + 32'(qbase) + i];
          wrow.w_high[i] = 2'(qb >> shift);
        end
        wrow.w_scales = sb[blk];
        sb_scale      = {sb[81], sb[80]};
        sb_min        = {sb[83], sb[82]};
      end
      SB_Q3: begin
        for (int i = 0; i < BLK; i++) begin
          qb = sb[32 + 32'(qbase) + i];
          hb = sb[32'(lbase) + i];
          wrow.w_high[i] = 2'(qb >> shift);
          wrow.w_low[i]  = hb[n4j];
        end
        s_lo = blk[3] ? sb[96 + 32'(blk[2:0])][7:4] : sb[96 + 32'(blk[2:0])][3:0];
        s_hi = 2'(sb[104 + 32'(blk[1:0])] >> (2 * blk[3:2]));
        wrow.w_scales = {2'b00, s_hi, s_lo};
        sb_scale      = {sb[109], sb[108]};
      end
      default: begin
        for (int i = 0; i < BLK; i++) irow.i_data[i] = sb[4 + 16 * 32'(blk) + i];
        irow.i_bsums = {sb[261 + 2 * 32'(blk)], sb[260 + 2 * 32'(blk)]};
        i_scale      = {sb[3], sb[2], sb[1], sb[0]};
      end
    endcase
  end

endmodule

// fbfq_sb_weight_cache: on-chip store for the weight super-blocks of the
// current tile, split into separate buffers and partitioned N ways so the
// Vector Compute Unit gets N whole blocks (16 weights and a scale each) in
// one read.
//
// Buffers (names and widths as in the published DSBP diagram):
//   w_high   2 bits x 16 per block row   w_low    1 bit x 16 per block row
//   w_scales 8 bits per block row        sb_scales, sb_mins 16 bits per SB
// Block b of super-block sb lives in partition b mod N at group address
// sb*(16/N) + b/N. One write port (the data mapper writes all N partitions of
// a group at once) and one read port that returns a whole group; reads are
// registered, giving their data one cycle after the address, as block RAM
// does. N must divide 16 and be at most 8. Partitioning follows the published
// description ("partitioned BRAM buffers ... access consecutive data in
// parallel"); capacity W_SB_CAP super-blocks is this design's choice.
module fbfq_sb_weight_cache
  import fbfq_pkg::*;
#(
  parameter int unsigned N        = N_FIFO,
  parameter int unsigned W_SB_CAP = 256
) (
  input  logic                                clk,
  // write side
  input  logic                                row_we,
  input  logic [$clog2(W_SB_CAP*NBLK/N)-1:0]  row_waddr,
  input  w_row_t [N-1:0]                      row_wdata,
  input  logic                                sb_we,
  input  logic [$clog2(W_SB_CAP)-1:0]         sb_waddr,
  input  logic [15:0]                         sb_scale_wdata,
  input  logic [15:0]                         sb_min_wdata,
  // read side
  input  logic [$clog2(W_SB_CAP*NBLK/N)-1:0]  row_raddr,
  output w_row_t [N-1:0]                      row_rdata,
  input  logic [$clog2(W_SB_CAP)-1:0]         sb_raddr,
  output logic [15:0]                         sb_scale_rdata,
  output logic [15:0]                         sb_min_rdata
);
  localparam int unsigned GROUPS = W_SB_CAP * NBLK / N;

  for (genvar p = 0; p < N; p++) begin : g_part
    logic [BLK-1:0][1:0] w_high   [GROUPS];
    logic [BLK-1:0]      w_low    [GROUPS];
    logic [7:0]          w_scales [GROUPS];

    always_ff @(posedge clk) begin
      if (row_we) begin
        w_high[row_waddr]   <= row_wdata[p].w_high;
        w_low[row_waddr]    <= row_wdata[p].w_low;
        w_scales[row_waddr] <= row_wdata[p].w_scales;
      end
    end

    always_ff @(posedge clk) begin
      row_rdata[p].w_high   <= w_high[row_raddr];
      row_rdata[p].w_low    <= w_low[row_raddr];
      row_rdata[p].w_scales <= w_scales[row_raddr];
    end
  end

  logic [15:0] sb_scales[W_SB_CAP];
  logic [15:0] sb_mins  [W_SB_CAP];

  always_ff @(posedge clk) begin
    if (sb_we) begin
      sb_scales[sb_waddr] <= sb_scale_wdata;
      sb_mins[sb_waddr]   <= sb_min_wdata;
    end
    sb_scale_rdata <= sb_scales[sb_raddr];
    sb_min_rdata   <= sb_mins[sb_raddr];
  end

endmodule

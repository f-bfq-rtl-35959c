// fbfq_sb_input_cache: on-chip store for the Q8_K input super-blocks, split
// into separate buffers and partitioned N ways so one read returns N whole
// blocks of 16 inputs.
//
// Buffers (names and widths as in the published DSBP diagram):
//   i_data  8 bits x 16 per block row    i_bsums 16 bits per block row
//   i_scales 32 bits (fp32) per SB
// Block b of super-block sb lives in partition b mod N at group address
// sb*(16/N) + b/N. The write port fills all N partitions of a group at once;
// the read port returns a whole group one cycle after the address (registered,
// block RAM style). N must divide 16 and be at most 8. Capacity I_SB_CAP
// super-blocks is this design's choice.
module fbfq_sb_input_cache
  import fbfq_pkg::*;
#(
  parameter int unsigned N        = N_FIFO,
  parameter int unsigned I_SB_CAP = 256
) (
  input  logic                               clk,
  input  logic                               row_we,
  input  logic [$clog2(I_SB_CAP*NBLK/N)-1:0] row_waddr,
  input  i_row_t [N-1:0]                     row_wdata,
  input  logic                               sb_we,
  input  logic [$clog2(I_SB_CAP)-1:0]        sb_waddr,
  input  logic [31:0]                        i_scale_wdata,
  input  logic [$clog2(I_SB_CAP*NBLK/N)-1:0] row_raddr,
  output i_row_t [N-1:0]                     row_rdata,
  input  logic [$clog2(I_SB_CAP)-1:0]        sb_raddr,
  output logic [31:0]                        i_scale_rdata
);
  localparam int unsigned GROUPS = I_SB_CAP * NBLK / N;

  for (genvar p = 0; p < N; p++) begin : g_part
    logic [BLK-1:0][7:0] i_data  [GROUPS];
    logic [15:0]         i_bsums [GROUPS];

    always_ff @(posedge clk) begin
      if (row_we) begin
        i_data[row_waddr]  <= row_wdata[p].i_data;
        i_bsums[row_waddr] <= row_wdata[p].i_bsums;
      end
    end

    always_ff @(posedge clk) begin
      row_rdata[p].i_data  <= i_data[row_raddr];
      row_rdata[p].i_bsums <= i_bsums[row_raddr];
    end
  end

  logic [31:0] i_scales[I_SB_CAP];

  always_ff @(posedge clk) begin
    if (sb_we) i_scales[sb_waddr] <= i_scale_wdata;
    i_scale_rdata <= i_scales[sb_raddr];
  end

endmodule

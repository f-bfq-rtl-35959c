// fbfq_sb_loader: the Dynamic SB Loader of the DSBP. Moves super-blocks from
// the data FIFOs into the SB weight cache or the SB input cache.
//
// Three stages, as in the published diagram:
//   FIFO reader  - once all N FIFOs of one type hold data, pops one word from
//                  each per cycle into a super-block buffer until the whole
//                  (padded) super-block is in. Weights take priority when both
//                  types are waiting; the weight variant comes from
//                  weight_type (Q2_K or Q3_K), inputs are always Q8_K.
//   bit-slicer   - N copies of fbfq_bit_slicer cut the buffer into the fields
//                  of blocks g*N .. g*N+N-1.
//   data mapper  - writes those N block rows at once to cache group
//                  sb*(16/N)+g, one group per cycle (g = 0 .. 16/N-1), and the
//                  super-block scales with group 0.
// A super-block therefore takes words/N + 16/N + 1 cycles: N is both the
// number of FIFOs read in parallel and the number of cache partitions
// written in parallel. All N slicers decode the same super-block scales;
// only slicer 0's copy is used, the others' scale outputs are left open. w_count and i_count
// count the super-blocks stored since the last clr_w / clr_i (which restart
// the cache write address at 0); the Scheduler waits on them. The ordering and
// priority are this design's choices.
module fbfq_sb_loader
  import fbfq_pkg::*;
#(
  parameter int unsigned N        = N_FIFO,
  parameter int unsigned W_SB_CAP = 256,
  parameter int unsigned I_SB_CAP = 256
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  wtype_e                           wtype,
  input  logic                             clr_w,
  input  logic                             clr_i,
  // weight FIFOs
  input  logic [N-1:0]                     w_empty,
  input  logic [N-1:0][31:0]               w_rdata,
  output logic [N-1:0]                     w_rd,
  // input FIFOs
  input  logic [N-1:0]                     i_empty,
  input  logic [N-1:0][31:0]               i_rdata,
  output logic [N-1:0]                     i_rd,
  // SB weight cache write port
  output logic                             wc_row_we,
  output logic [$clog2(W_SB_CAP*NBLK/N)-1:0] wc_row_waddr,
  output w_row_t [N-1:0]                   wc_row_wdata,
  output logic                             wc_sb_we,
  output logic [$clog2(W_SB_CAP)-1:0]      wc_sb_waddr,
  output logic [15:0]                      wc_sb_scale,
  output logic [15:0]                      wc_sb_min,
  // SB input cache write port
  output logic                             ic_row_we,
  output logic [$clog2(I_SB_CAP*NBLK/N)-1:0] ic_row_waddr,
  output i_row_t [N-1:0]                   ic_row_wdata,
  output logic                             ic_sb_we,
  output logic [$clog2(I_SB_CAP)-1:0]      ic_sb_waddr,
  output logic [31:0]                      ic_i_scale,
  // status
  output logic [15:0]                      w_count,
  output logic [15:0]                      i_count,
  output logic                             idle
);
  localparam int unsigned MAXW = sb_words(SB_Q8, N);  // largest SB in words
  localparam int unsigned GW   = $clog2(MAXW + 1);
  localparam int unsigned NG   = NBLK / N;            // groups per SB
  localparam int unsigned GB   = $clog2(NG);          // group index bits

  typedef enum logic [1:0] {S_IDLE, S_GATHER, S_MAP} state_e;
  state_e             state;
  sbkind_e            kind;
  logic [GW-1:0]      got;       // words gathered so far
  logic [GW-1:0]      need;      // words in this SB
  logic [GB-1:0]      grp;
  logic [MAXW-1:0][31:0] sbuf;

  w_row_t [N-1:0]   s_wrow;
  i_row_t [N-1:0]   s_irow;
  logic [N-1:0][15:0] s_scale, s_min;
  logic [N-1:0][31:0] s_iscale;

  for (genvar p = 0; p < N; p++) begin : g_slice
    fbfq_bit_slicer #(.SB_BYTES(MAXW * 4)) u_slicer (
      .sb      (sbuf),
      .kind    (kind),
      .blk     (4'(32'(grp) * N + p)),
      .wrow    (s_wrow[p]),
      .irow    (s_irow[p]),
      .sb_scale(s_scale[p]),
      .sb_min  (s_min[p]),
      .i_scale (s_iscale[p])
    );
  end

  wire w_avail  = (w_empty == '0);
  wire i_avail  = (i_empty == '0);
  wire is_w     = (kind != SB_Q8);
  wire pop      = (state == S_GATHER) && (is_w ? w_avail : i_avail);

  assign w_rd = (pop && is_w)  ? '1 : '0;
  assign i_rd = (pop && !is_w) ? '1 : '0;
  assign idle = (state == S_IDLE);

  // data mapper
  assign wc_row_we    = (state == S_MAP) && is_w;
  assign wc_row_waddr = {w_count[$clog2(W_SB_CAP)-1:0], grp};
  assign wc_row_wdata = s_wrow;
  assign wc_sb_we     = wc_row_we && (grp == '0);
  assign wc_sb_waddr  = w_count[$clog2(W_SB_CAP)-1:0];
  assign wc_sb_scale  = s_scale[0];
  assign wc_sb_min    = s_min[0];
  assign ic_row_we    = (state == S_MAP) && !is_w;
  assign ic_row_waddr = {i_count[$clog2(I_SB_CAP)-1:0], grp};
  assign ic_row_wdata = s_irow;
  assign ic_sb_we     = ic_row_we && (grp == '0);
  assign ic_sb_waddr  = i_count[$clog2(I_SB_CAP)-1:0];
  assign ic_i_scale   = s_iscale[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      kind    <= SB_Q8;
      got     <= '0;
      need    <= '0;
      grp     <= '0;
      w_count <= '0;
      i_count <= '0;
      sbuf    <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          got <= '0;
          grp <= '0;
          if (w_avail) begin
            kind  <= (wtype == WT_Q3) ? SB_Q3 : SB_Q2;
            need  <= GW'(sb_words((wtype == WT_Q3) ? SB_Q3 : SB_Q2, N));
            state <= S_GATHER;
          end else if (i_avail) begin
            kind  <= SB_Q8;
            need  <= GW'(MAXW);
            state <= S_GATHER;
          end
        end
        S_GATHER: if (pop) begin
          for (int f = 0; f < N; f++)
            sbuf[32'(got) + f] <= is_w ? w_rdata[f] : i_rdata[f];
          got <= got + GW'(N);
          if (got + GW'(N) == need) state <= S_MAP;
        end
        S_MAP: begin
          grp <= grp + 1'b1;
          if (grp == GB'(NG - 1)) begin
            if (is_w) w_count <= w_count + 1'b1;
            else      i_count <= i_count + 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
      // clearing restarts the write address of that cache (after any update)
      if (clr_w) w_count <= '0;
      if (clr_i) i_count <= '0;
    end
  end

  a_w_cap: assert property (@(posedge clk) disable iff (!rst_n) 32'(w_count) <= W_SB_CAP);
  a_i_cap: assert property (@(posedge clk) disable iff (!rst_n) 32'(i_count) <= I_SB_CAP);

endmodule

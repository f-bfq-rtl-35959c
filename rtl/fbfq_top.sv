// fbfq_top: the F-BFQ accelerator. Computes block floating-point MatMuls with
// Q2_K or Q3_K weights and Q8_K inputs, switching variant per layer through
// the weight_type configuration register, with float32 results.
//
// Everything arrives on one 32-bit AXI-Stream (s_axis_*): instruction words
// and the super-blocks that follow LOAD instructions. Results leave on a
// second 32-bit AXI-Stream (m_axis_*). Inside:
//   instruction decoder -> configuration registers, hands operand words to
//   data loader         -> N weight FIFOs / N input FIFOs (word j to FIFO j mod N)
//   DSBP                -> SB loader fills SB weight/input caches, VCU computes
//   scheduler           -> tiles M x N outputs over the DSBP, accumulates
//                          results, streams them out on STORE.
// The block structure follows the published overview; stream width, N, FIFO
// depth, cache and output buffer capacities are this design's choices. A new
// LOAD waits until the FIFOs and the SB loader have drained, so a cache is
// never overwritten while its previous contents are still arriving.
// The FIFOs' fill levels are left open: only their full/empty flags are
// needed here. rst_n also disables the assertions below the top, which lint
// reports as a reset used both synchronously and asynchronously.
module fbfq_top
  import fbfq_pkg::*;
#(
  parameter int unsigned N          = N_FIFO,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned W_SB_CAP   = 256,
  parameter int unsigned I_SB_CAP   = 256,
  parameter int unsigned OUT_CAP    = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  output logic        m_axis_tlast,
  input  logic        m_axis_tready,
  output logic        idle
);
  cfg_t        cfg;
  logic        dl_start, dl_is_input, dl_valid, dl_ready, dl_done, dl_busy;
  logic [31:0] dl_words, dl_data, fifo_wdata;
  logic        mm_start, mm_done, st_start, st_done, sched_busy, dec_idle;
  logic [N-1:0] w_wr, w_full, w_empty, w_rd, i_wr, i_full, i_empty, i_rd;
  logic [N-1:0][31:0] w_rdata, i_rdata;
  logic [15:0] w_count, i_count;
  logic        loader_idle;
  logic        cmd_valid, cmd_ready, res_valid;
  logic [15:0] cmd_m, cmd_n;
  logic [31:0] res_data;

  wire drain_idle = loader_idle && !dl_busy && (w_empty == '1) && (i_empty == '1);

  fbfq_instr_decoder #(.N(N)) u_dec (
    .clk, .rst_n,
    .s_tdata(s_axis_tdata), .s_tvalid(s_axis_tvalid), .s_tready(s_axis_tready),
    .cfg,
    .dl_start, .dl_is_input, .dl_words, .dl_valid, .dl_data, .dl_ready, .dl_done,
    .drain_idle,
    .mm_start, .mm_done, .st_start, .st_done, .idle(dec_idle)
  );

  fbfq_data_loader #(.N(N)) u_dl (
    .clk, .rst_n,
    .start(dl_start), .is_input(dl_is_input), .num_words(dl_words),
    .beat_valid(dl_valid), .beat_data(dl_data), .beat_ready(dl_ready),
    .w_wr, .w_full, .i_wr, .i_full, .wr_data(fifo_wdata),
    .done(dl_done), .busy(dl_busy)
  );

  for (genvar f = 0; f < N; f++) begin : g_fifo
    fbfq_fifo #(.W(32), .DEPTH(FIFO_DEPTH)) u_wfifo (
      .clk, .rst_n, .wr_en(w_wr[f]), .wr_data(fifo_wdata), .full(w_full[f]),
      .rd_en(w_rd[f]), .rd_data(w_rdata[f]), .empty(w_empty[f]), .count()
    );
    fbfq_fifo #(.W(32), .DEPTH(FIFO_DEPTH)) u_ififo (
      .clk, .rst_n, .wr_en(i_wr[f]), .wr_data(fifo_wdata), .full(i_full[f]),
      .rd_en(i_rd[f]), .rd_data(i_rdata[f]), .empty(i_empty[f]), .count()
    );
  end

  fbfq_dsbp #(.N(N), .W_SB_CAP(W_SB_CAP), .I_SB_CAP(I_SB_CAP)) u_dsbp (
    .clk, .rst_n, .wtype(cfg.wtype),
    .clr_w(dl_start && !dl_is_input), .clr_i(dl_start && dl_is_input),
    .w_empty, .w_rdata, .w_rd, .i_empty, .i_rdata, .i_rd,
    .w_count, .i_count, .loader_idle,
    .cmd_valid, .cmd_ready, .cmd_m, .cmd_n, .k_sb(cfg.k_sb),
    .res_valid, .res_data
  );

  fbfq_scheduler #(.OUT_CAP(OUT_CAP)) u_sched (
    .clk, .rst_n, .cfg,
    .mm_start, .mm_done, .st_start, .st_done,
    .w_count, .i_count,
    .cmd_valid, .cmd_ready, .cmd_m, .cmd_n, .res_valid, .res_data,
    .m_tdata(m_axis_tdata), .m_tvalid(m_axis_tvalid), .m_tlast(m_axis_tlast),
    .m_tready(m_axis_tready), .busy(sched_busy)
  );

  assign idle = dec_idle && !sched_busy && drain_idle;

endmodule

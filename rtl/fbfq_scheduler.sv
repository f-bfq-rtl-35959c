// fbfq_scheduler: tiles the MatMul of the current layer tile over the DSBP and
// gathers the results.
//
// MATMUL (mm_start): waits until the SB loader has put m_rows*k_sb weight and
// n_cols*k_sb input super-blocks into the caches, then issues one DSBP
// command per output element, row-major (m outer, n inner). Each float32
// result is added into output buffer entry m*n_cols+n, so several MATMULs on
// successive depth tiles accumulate into the same outputs; mm_done pulses
// when the last result is in.
// STORE (st_start): sends the m_rows*n_cols outputs, row-major, on the output
// AXI-Stream (tlast on the last word, tready back-pressure honoured) and
// empties the buffer; st_done pulses after the last handshake.
// The weight_type field of the configuration is not needed here (the DSBP
// uses it) and is left unused.
// The buffer keeps a valid bit per entry so that an entry never written reads
// as 0.0 and "empty" needs no clearing pass. OUT_CAP, the order of outputs and
// accumulate-until-store are this design's choices; tiling, synchronising,
// accumulating and sending results back are the scheduler's duties in the
// source description.
module fbfq_scheduler
  import fbfq_pkg::*;
  import fbfq_fp_pkg::*;
#(
  parameter int unsigned OUT_CAP = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  logic        mm_start,
  output logic        mm_done,
  input  logic        st_start,
  output logic        st_done,
  input  logic [15:0] w_count,
  input  logic [15:0] i_count,
  // DSBP command / result
  output logic        cmd_valid,
  input  logic        cmd_ready,
  output logic [15:0] cmd_m,
  output logic [15:0] cmd_n,
  input  logic        res_valid,
  input  logic [31:0] res_data,
  // output stream
  output logic [31:0] m_tdata,
  output logic        m_tvalid,
  output logic        m_tlast,
  input  logic        m_tready,
  output logic        busy
);
  localparam int unsigned OAW = $clog2(OUT_CAP);

  typedef enum logic [2:0] {S_IDLE, S_WAIT_DATA, S_ISSUE, S_DRAIN, S_STORE} state_e;
  state_e       state;
  logic [31:0]  obuf [OUT_CAP];
  logic [OUT_CAP-1:0] ovalid;
  logic [31:0]  total;      // m_rows * n_cols
  logic [31:0]  ridx;       // results received / words sent
  logic [OAW-1:0] oaddr;

  wire [31:0] w_need = 32'(cfg.m_rows) * 32'(cfg.k_sb);
  wire [31:0] i_need = 32'(cfg.n_cols) * 32'(cfg.k_sb);
  wire        last_cmd = (cmd_m == cfg.m_rows - 1'b1) && (cmd_n == cfg.n_cols - 1'b1);

  assign cmd_valid = (state == S_ISSUE);
  assign busy      = (state != S_IDLE);
  assign oaddr     = OAW'(ridx);
  assign m_tvalid  = (state == S_STORE);
  assign m_tdata   = ovalid[oaddr] ? obuf[oaddr] : 32'd0;
  assign m_tlast   = (ridx == total - 1);

  // accumulate DSBP results into the output buffer
  always_ff @(posedge clk) begin
    if (res_valid) obuf[oaddr] <= ovalid[oaddr] ? fadd(obuf[oaddr], res_data) : res_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      ovalid  <= '0;
      total   <= '0;
      ridx    <= '0;
      cmd_m   <= '0;
      cmd_n   <= '0;
      mm_done <= 1'b0;
      st_done <= 1'b0;
    end else begin
      mm_done <= 1'b0;
      st_done <= 1'b0;
      if (res_valid) begin
        ovalid[oaddr] <= 1'b1;
        ridx          <= ridx + 1'b1;
      end
      case (state)
        S_IDLE: begin
          total <= 32'(cfg.m_rows) * 32'(cfg.n_cols);
          ridx  <= '0;
          if (mm_start) begin
            cmd_m <= '0;
            cmd_n <= '0;
            state <= S_WAIT_DATA;
          end else if (st_start) begin
            state <= S_STORE;
          end
        end
        S_WAIT_DATA:
          if (total == 0) begin
            mm_done <= 1'b1;
            state   <= S_IDLE;
          end else if (32'(w_count) >= w_need && 32'(i_count) >= i_need) begin
            state <= S_ISSUE;
          end
        S_ISSUE: if (cmd_ready) begin
          if (last_cmd) state <= S_DRAIN;
          else if (cmd_n == cfg.n_cols - 1'b1) begin
            cmd_n <= '0;
            cmd_m <= cmd_m + 1'b1;
          end else begin
            cmd_n <= cmd_n + 1'b1;
          end
        end
        S_DRAIN: if (res_valid && ridx == total - 1) begin
          mm_done <= 1'b1;
          state   <= S_IDLE;
        end
        S_STORE:
          if (total == 0) begin
            st_done <= 1'b1;
            state   <= S_IDLE;
          end else if (m_tready) begin
            ovalid[oaddr] <= 1'b0;
            ridx          <= ridx + 1'b1;
            if (m_tlast) begin
              st_done <= 1'b1;
              state   <= S_IDLE;
            end
          end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_fits: assert property (@(posedge clk) disable iff (!rst_n)
                           mm_start |-> 32'(cfg.m_rows) * 32'(cfg.n_cols) <= OUT_CAP);

endmodule

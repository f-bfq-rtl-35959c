// fbfq_instr_decoder: reads micro-ISA instructions from the input AXI-Stream
// and steers the rest of the accelerator.
//
// An instruction word carries its opcode in bits [7:0]. The opcodes are the
// one-hot values 0x01 CONFIG, 0x02 LOAD_W, 0x04 LOAD_I, 0x08 MATMUL and
// 0x10 STORE; as a choice of this design several of them may be set in one
// word and are then executed one after another in that ascending order.
//   CONFIG  : the next four stream words are weight_type (bit 0: 0 = Q2_K,
//             1 = Q3_K), k_sb (depth in super-blocks), m_rows and n_cols.
//   LOAD_W  : m_rows*k_sb weight super-blocks follow; the decoder waits until
//             the previous data has left the FIFOs (drain_idle), pulses
//             dl_start and passes the stream through to the Data Loader until
//             it reports dl_done.
//   LOAD_I  : the same for n_cols*k_sb Q8_K input super-blocks.
//   MATMUL  : pulses mm_start and waits for mm_done from the Scheduler.
//   STORE   : pulses st_start and waits for st_done (output sent on the
//             output stream by the Scheduler).
// Instructions run strictly one at a time. Operand word formats and the
// blocking behaviour are this design's choices; the opcode values are the
// paper's.
module fbfq_instr_decoder
  import fbfq_pkg::*;
#(
  parameter int unsigned N = N_FIFO
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction / operand stream
  input  logic [31:0] s_tdata,
  input  logic        s_tvalid,
  output logic        s_tready,
  // configuration registers
  output cfg_t        cfg,
  // data loader
  output logic        dl_start,
  output logic        dl_is_input,
  output logic [31:0] dl_words,
  output logic        dl_valid,
  output logic [31:0] dl_data,
  input  logic        dl_ready,
  input  logic        dl_done,
  input  logic        drain_idle,
  // scheduler
  output logic        mm_start,
  input  logic        mm_done,
  output logic        st_start,
  input  logic        st_done,
  output logic        idle
);
  typedef enum logic [2:0] {S_FETCH, S_DISPATCH, S_CFG, S_LOAD, S_WAIT_MM, S_WAIT_ST} state_e;
  state_e     state;
  logic [4:0] pending;
  logic [1:0] cfg_idx;
  logic [4:0] lowest;

  // lowest set opcode bit still to execute
  always_comb begin
    lowest = '0;
    for (int i = 4; i >= 0; i--) if (pending[i]) lowest = 5'(1 << i);
  end

  wire [31:0] w_sb_words = (cfg.wtype == WT_Q3) ? sb_words(SB_Q3, N) : sb_words(SB_Q2, N);
  wire [31:0] i_sb_words = sb_words(SB_Q8, N);
  wire [31:0] w_total    = 32'(cfg.m_rows) * 32'(cfg.k_sb) * w_sb_words;
  wire [31:0] i_total    = 32'(cfg.n_cols) * 32'(cfg.k_sb) * i_sb_words;

  assign s_tready = (state == S_FETCH) || (state == S_CFG) || (state == S_LOAD && dl_ready);
  assign dl_valid = (state == S_LOAD) && s_tvalid;
  assign dl_data  = s_tdata;
  assign idle     = (state == S_FETCH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_FETCH;
      pending     <= '0;
      cfg_idx     <= '0;
      cfg         <= '0;
      dl_start    <= 1'b0;
      dl_is_input <= 1'b0;
      dl_words    <= '0;
      mm_start    <= 1'b0;
      st_start    <= 1'b0;
    end else begin
      dl_start <= 1'b0;
      mm_start <= 1'b0;
      st_start <= 1'b0;
      case (state)
        S_FETCH: if (s_tvalid) begin
          pending <= s_tdata[4:0];
          state   <= S_DISPATCH;
        end
        S_DISPATCH: begin
          if (pending == '0) state <= S_FETCH;
          else begin
            unique case (lowest)
              5'h01: begin
                pending <= pending & ~lowest;
                cfg_idx <= '0;
                state   <= S_CFG;
              end
              5'h02, 5'h04: if (drain_idle) begin
                pending     <= pending & ~lowest;
                dl_start    <= 1'b1;
                dl_is_input <= (lowest == 5'h04);
                dl_words    <= (lowest == 5'h04) ? i_total : w_total;
                state       <= S_LOAD;
              end
              5'h08: begin
                pending  <= pending & ~lowest;
                mm_start <= 1'b1;
                state    <= S_WAIT_MM;
              end
              default: begin
                pending  <= pending & ~lowest;
                st_start <= 1'b1;
                state    <= S_WAIT_ST;
              end
            endcase
          end
        end
        S_CFG: if (s_tvalid) begin
          case (cfg_idx)
            2'd0: cfg.wtype  <= wtype_e'(s_tdata[0]);
            2'd1: cfg.k_sb   <= s_tdata[15:0];
            2'd2: cfg.m_rows <= s_tdata[15:0];
            default: cfg.n_cols <= s_tdata[15:0];
          endcase
          cfg_idx <= cfg_idx + 1'b1;
          if (cfg_idx == 2'd3) state <= S_DISPATCH;
        end
        S_LOAD:    if (dl_done) state <= S_DISPATCH;
        S_WAIT_MM: if (mm_done) state <= S_DISPATCH;
        S_WAIT_ST: if (st_done) state <= S_DISPATCH;
        default:   state <= S_FETCH;
      endcase
    end
  end

endmodule

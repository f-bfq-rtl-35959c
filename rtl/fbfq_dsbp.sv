// fbfq_dsbp: Dynamic Super-Block Processor. Holds the Dynamic SB Loader, the
// SB weight and SB input caches and the Q2-Q3 Vector Compute Unit, plus the
// sequencer that feeds the VCU.
//
// The loader fills the caches from the data FIFOs on its own (see
// fbfq_sb_loader). A compute command (cmd_valid/cmd_ready handshake) names one
// weight row m and one input column n; the sequencer then reads, for k = 0 ..
// k_sb-1 and group g = 0 .. 16/N-1, weight cache group (m*k_sb+k)*16/N+g and
// input cache group (n*k_sb+k)*16/N+g (N blocks each), one group per cycle,
// and streams them into the VCU. The caches answer one cycle later, so the
// flags are delayed by one cycle to stay aligned. A command takes
// (16/N)*k_sb cycles to issue; the next command is accepted right after, so
// the VCU stays busy. res_valid/res_data return the float32 dot product of
// each command, in command order: res_valid rises (16/N)*k_sb + 4 clock edges
// after the edge that accepts the command (one for the cache read, three for
// the VCU). N (default 4) is both the FIFO count and the number of blocks
// computed per cycle; it must divide 16 and be at most 8. The command granularity and sequencer are this
// design's choices; the component split follows the published diagram.
module fbfq_dsbp
  import fbfq_pkg::*;
#(
  parameter int unsigned N        = N_FIFO,
  parameter int unsigned W_SB_CAP = 256,
  parameter int unsigned I_SB_CAP = 256
) (
  input  logic               clk,
  input  logic               rst_n,
  input  wtype_e             wtype,
  input  logic               clr_w,
  input  logic               clr_i,
  input  logic [N-1:0]       w_empty,
  input  logic [N-1:0][31:0] w_rdata,
  output logic [N-1:0]       w_rd,
  input  logic [N-1:0]       i_empty,
  input  logic [N-1:0][31:0] i_rdata,
  output logic [N-1:0]       i_rd,
  output logic [15:0]        w_count,
  output logic [15:0]        i_count,
  output logic               loader_idle,
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  logic [15:0]        cmd_m,
  input  logic [15:0]        cmd_n,
  input  logic [15:0]        k_sb,
  output logic               res_valid,
  output logic [31:0]        res_data
);
  localparam int unsigned WAW = $clog2(W_SB_CAP);
  localparam int unsigned IAW = $clog2(I_SB_CAP);

  localparam int unsigned NG  = NBLK / N;   // groups per super-block
  localparam int unsigned GB  = $clog2(NG);

  if (N > 8 || NBLK % N != 0) begin : g_bad_n
    $error("fbfq_dsbp: N must divide 16 and be at most 8");
  end

  // ---- loader <-> caches ----
  logic                 wc_row_we, wc_sb_we, ic_row_we, ic_sb_we;
  logic [WAW+GB-1:0]    wc_row_waddr;
  logic [WAW-1:0]       wc_sb_waddr;
  logic [IAW+GB-1:0]    ic_row_waddr;
  logic [IAW-1:0]       ic_sb_waddr;
  w_row_t [N-1:0]       wc_row_wdata, w_row;
  i_row_t [N-1:0]       ic_row_wdata, i_row;
  logic [15:0]          wc_sb_scale, wc_sb_min, sb_scale, sb_min;
  logic [31:0]          ic_i_scale, i_scale;

  fbfq_sb_loader #(.N(N), .W_SB_CAP(W_SB_CAP), .I_SB_CAP(I_SB_CAP)) u_loader (
    .clk, .rst_n, .wtype, .clr_w, .clr_i,
    .w_empty, .w_rdata, .w_rd, .i_empty, .i_rdata, .i_rd,
    .wc_row_we, .wc_row_waddr, .wc_row_wdata, .wc_sb_we, .wc_sb_waddr, .wc_sb_scale, .wc_sb_min,
    .ic_row_we, .ic_row_waddr, .ic_row_wdata, .ic_sb_we, .ic_sb_waddr, .ic_i_scale,
    .w_count, .i_count, .idle(loader_idle)
  );

  // ---- sequencer ----
  logic           active;
  logic [15:0]    k, klast;
  logic [GB-1:0]  b;     // group within the super-block
  logic [WAW-1:0] wsb;
  logic [IAW-1:0] isb;

  assign cmd_ready = !active || (b == GB'(NG - 1) && k == klast);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      k      <= '0;
      klast  <= '0;
      b      <= '0;
      wsb    <= '0;
      isb    <= '0;
    end else begin
      if (active) begin
        b <= b + 1'b1;
        if (b == GB'(NG - 1)) begin
          k   <= k + 1'b1;
          wsb <= wsb + 1'b1;
          isb <= isb + 1'b1;
          if (k == klast) active <= 1'b0;
        end
      end
      if (cmd_valid && cmd_ready) begin
        active <= 1'b1;
        k      <= '0;
        klast  <= k_sb - 1'b1;
        b      <= '0;
        wsb    <= WAW'(32'(cmd_m) * 32'(k_sb));
        isb    <= IAW'(32'(cmd_n) * 32'(k_sb));
      end
    end
  end

  fbfq_sb_weight_cache #(.N(N), .W_SB_CAP(W_SB_CAP)) u_wcache (
    .clk,
    .row_we(wc_row_we), .row_waddr(wc_row_waddr), .row_wdata(wc_row_wdata),
    .sb_we(wc_sb_we), .sb_waddr(wc_sb_waddr), .sb_scale_wdata(wc_sb_scale), .sb_min_wdata(wc_sb_min),
    .row_raddr({wsb, b}), .row_rdata(w_row),
    .sb_raddr(wsb), .sb_scale_rdata(sb_scale), .sb_min_rdata(sb_min)
  );

  fbfq_sb_input_cache #(.N(N), .I_SB_CAP(I_SB_CAP)) u_icache (
    .clk,
    .row_we(ic_row_we), .row_waddr(ic_row_waddr), .row_wdata(ic_row_wdata),
    .sb_we(ic_sb_we), .sb_waddr(ic_sb_waddr), .i_scale_wdata(ic_i_scale),
    .row_raddr({isb, b}), .row_rdata(i_row),
    .sb_raddr(isb), .i_scale_rdata(i_scale)
  );

  // row flags, delayed to line up with the cache read data
  logic rv, rbf, rbl, rsf, rsl;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rv <= 1'b0; rbf <= 1'b0; rbl <= 1'b0; rsf <= 1'b0; rsl <= 1'b0;
    end else begin
      rv  <= active;
      rbf <= (b == '0);
      rbl <= (b == GB'(NG - 1));
      rsf <= (k == 16'd0);
      rsl <= (k == klast);
    end
  end

  fbfq_vcu #(.N(N)) u_vcu (
    .clk, .rst_n, .wtype,
    .in_valid(rv), .blk_first(rbf), .blk_last(rbl), .sb_first(rsf), .sb_last(rsl),
    .w_row, .i_row, .sb_scale, .sb_min, .i_scale,
    .out_valid(res_valid), .acc(res_data)
  );

  a_k_nonzero: assert property (@(posedge clk) disable iff (!rst_n) cmd_valid |-> k_sb != 0);

endmodule

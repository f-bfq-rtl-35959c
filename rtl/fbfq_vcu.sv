// fbfq_vcu: the Q2-Q3 Vector Compute Unit. Turns a stream of cache row
// groups (N blocks of 16 weights and 16 inputs per cycle) into the float32
// dot product of one weight row with one input column.
//
// Structure (as in the published diagram): a shared vector engine, a Q2 and a
// Q3 scalar unit that both work on every block, a mux that picks the one the
// weight_type register selects, and the accumulator Acc. To take N blocks per
// cycle the engine and both scalar units are replicated N times (lane p sees
// blocks p, N+p, ...); this replication is this design's reading of "the DSBP
// can compute N operations simultaneously".
//   stage 1  vector engines: integer block dot products
//   stage 2  scalar units: per-lane integer sums over the super-block
//   stage 3  at the last group of a super-block, add the N lane sums, apply
//            the super-block scales in float32 and pick the variant:
//              Q3_K: d*yd*isum3            Q2_K: d*yd*isum2 - dmin*yd*msum2
//   stage 4  Acc = (first super-block ? 0 : Acc) + term
// Inputs per group: in_valid, blk_first/blk_last (first/last group of a
// super-block),
// sb_first/sb_last (first/last super-block of this output), the rows, and the
// super-block scales (sb_scale, sb_min: fp16; i_scale: fp32). out_valid pulses
// with acc three clock edges after the edge that takes the last row of the
// last super-block. Rows may
// arrive back to back; the float formulas are the GGUF reference ones, the
// pipeline split is this design's choice.
module fbfq_vcu
  import fbfq_pkg::*;
  import fbfq_fp_pkg::*;
#(
  parameter int unsigned N = N_FIFO
) (
  input  logic        clk,
  input  logic        rst_n,
  input  wtype_e      wtype,
  input  logic        in_valid,
  input  logic        blk_first,
  input  logic        blk_last,
  input  logic        sb_first,
  input  logic        sb_last,
  input  w_row_t [N-1:0] w_row,
  input  i_row_t [N-1:0] i_row,
  input  logic [15:0] sb_scale,
  input  logic [15:0] sb_min,
  input  logic [31:0] i_scale,
  output logic        out_valid,
  output logic [31:0] acc
);
  // ---- stage 1: vector engines ----
  logic [N-1:0]              v1;
  logic signed [N-1:0][15:0] dot1;
  logic                      bf1, bl1, sf1, sl1;
  logic [N-1:0][7:0]         sc1;
  logic signed [N-1:0][15:0] bsum1;
  logic [15:0]               d1, dmin1;
  logic [31:0]               yd1;

  // ---- stage 2: scalar units ----
  logic signed [N-1:0][31:0] isum3_l, isum2_l, msum2_l;

  for (genvar p = 0; p < N; p++) begin : g_lane
    fbfq_vector_engine #(.LANES(BLK)) u_ve (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .wtype    (wtype),
      .w_high   (w_row[p].w_high),
      .w_low    (w_row[p].w_low),
      .x        (i_row[p].i_data),
      .out_valid(v1[p]),
      .dot      (dot1[p])
    );

    fbfq_q3_scalar u_q3 (
      .clk(clk), .rst_n(rst_n), .in_valid(v1[p]), .first(bf1),
      .dot(dot1[p]), .scale(sc1[p]), .isum(isum3_l[p])
    );

    fbfq_q2_scalar u_q2 (
      .clk(clk), .rst_n(rst_n), .in_valid(v1[p]), .first(bf1),
      .dot(dot1[p]), .scale(sc1[p]), .bsum(bsum1[p]), .isum(isum2_l[p]), .msum(msum2_l[p])
    );

    always_ff @(posedge clk) begin
      if (in_valid) begin
        sc1[p]   <= w_row[p].w_scales;
        bsum1[p] <= $signed(i_row[p].i_bsums);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      bf1   <= blk_first;
      bl1   <= blk_last;
      sf1   <= sb_first;
      sl1   <= sb_last;
      d1    <= sb_scale;
      dmin1 <= sb_min;
      yd1   <= i_scale;
    end
  end

  logic signed [31:0] isum3, isum2, msum2;
  logic               v2;
  logic               sf2, sl2;
  logic [15:0]        d2, dmin2;
  logic [31:0]        yd2;

  // lane sums of the completed super-block
  always_comb begin
    isum3 = '0;
    isum2 = '0;
    msum2 = '0;
    for (int p = 0; p < N; p++) begin
      isum3 += isum3_l[p];
      isum2 += isum2_l[p];
      msum2 += msum2_l[p];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1[0] && bl1;   // super-block sums complete
  end

  always_ff @(posedge clk) begin
    if (v1[0] && bl1) begin
      sf2   <= sf1;
      sl2   <= sl1;
      d2    <= d1;
      dmin2 <= dmin1;
      yd2   <= yd1;
    end
  end

  // ---- stage 3: super-block scaling and variant mux ----
  logic [31:0] dd, dm, t_q3, t_q2, term_mux, term3;
  logic        v3, sf3, sl3;

  always_comb begin
    dd       = fmul(h2f(d2), yd2);
    dm       = fmul(h2f(dmin2), yd2);
    t_q3     = fmul(dd, i2f(isum3));
    t_q2     = fadd(fmul(dd, i2f(isum2)), fmul(dm, i2f(msum2)) ^ 32'h8000_0000);
    term_mux = (wtype == WT_Q3) ? t_q3 : t_q2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v3    <= 1'b0;
      sf3   <= 1'b0;
      sl3   <= 1'b0;
      term3 <= '0;
    end else begin
      v3 <= v2;
      if (v2) begin
        sf3   <= sf2;
        sl3   <= sl2;
        term3 <= term_mux;
      end
    end
  end

  // ---- stage 4: Acc ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= v3 && sl3;
      if (v3) acc <= sf3 ? term3 : fadd(acc, term3);
    end
  end

endmodule

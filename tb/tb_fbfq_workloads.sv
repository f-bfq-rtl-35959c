// tb_fbfq_workloads: runs full-size layer tiles of the evaluated models
// through the accelerator at its default sizes.
//
// Each case is one output-stationary tile as a host would send it: the
// weight cache filled with as many whole rows of the layer's depth as fit
// (256 super-blocks), and the input tile of a 6-token prompt. The depths are
// the hidden and feed-forward widths of the models:
//   GPT-2 attention/FFN-up     depth  768 (k_sb =  3), 85 rows, Q3_K
//   GPT-2 FFN-down             depth 3072 (k_sb = 12), 21 rows, Q2_K
//   TinyLlama / MobileLLaMA    depth 2048 (k_sb =  8), 32 rows, Q2_K
//   TinyLlama / MobileLLaMA    depth 5632 (k_sb = 22), 11 rows, Q3_K
// Every output is compared with a double-precision reference. The MATMUL
// time (from the MATMUL word to the STORE word being taken, since STORE waits
// for MATMUL to finish) must be rows*tokens*k_sb*16/N cycles plus a small
// fixed overhead: the DSBP must not stall once the data is in the caches.
module tb_fbfq_workloads;
  import fbfq_pkg::*;
  import fbfq_tb_pkg::*;

  localparam int TOK = 6;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic [31:0] s_tdata = '0;
  logic        s_tvalid = 1'b0;
  logic        s_tready;
  logic [31:0] m_tdata;
  logic        m_tvalid, m_tlast;
  logic        m_tready = 1'b1;
  logic        idle;
  int          cyc = 0;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  fbfq_top dut (
    .clk, .rst_n,
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tlast(m_tlast),
    .m_axis_tready(m_tready), .idle
  );

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one word per cycle while the accelerator accepts
  task automatic send(input logic [31:0] w);
    @(negedge clk);
    s_tdata  = w;
    s_tvalid = 1'b1;
    #2;
    while (!s_tready) begin
      @(negedge clk);
      #2;
    end
    @(posedge clk);
    #1 s_tvalid = 1'b0;
  endtask

  task automatic send_sb(input sb_t s, input sbkind_e kind);
    for (int w = 0; w < words_of(kind); w++) send(sb_word(s, w));
  endtask

  task automatic run_tile(input string name, input bit q3, input int k, input int rows);
    sb_t w[][], y[][];
    real exp[], mag[];
    real mg;
    int  t0, t1, got, expect_cyc;
    w = new[rows];
    y = new[TOK];
    for (int m = 0; m < rows; m++) begin
      w[m] = new[k];
      for (int j = 0; j < k; j++) w[m][j] = q3 ? gen_q3() : gen_q2();
    end
    for (int n = 0; n < TOK; n++) begin
      y[n] = new[k];
      for (int j = 0; j < k; j++) y[n][j] = gen_q8();
    end
    exp = new[rows * TOK];
    mag = new[rows * TOK];
    for (int m = 0; m < rows; m++)
      for (int n = 0; n < TOK; n++) begin
        exp[m*TOK+n] = 0.0;
        mag[m*TOK+n] = 0.0;
        for (int j = 0; j < k; j++) begin
          exp[m*TOK+n] += ref_dot(w[m][j], y[n][j], q3, mg);
          mag[m*TOK+n] += mg;
        end
      end

    send(32'h01);
    send(32'(q3)); send(32'(k)); send(32'(rows)); send(32'(TOK));
    send(32'h02);
    for (int m = 0; m < rows; m++) for (int j = 0; j < k; j++) send_sb(w[m][j], q3 ? SB_Q3 : SB_Q2);
    send(32'h04);
    for (int n = 0; n < TOK; n++) for (int j = 0; j < k; j++) send_sb(y[n][j], SB_Q8);
    send(32'h08);
    t0 = cyc;
    send(32'h10);
    t1 = cyc;
    expect_cyc = rows * TOK * k * (NBLK / N_FIFO);
    checks++;
    if (t1 - t0 < expect_cyc || t1 - t0 > expect_cyc + 40) begin
      failures++;
      $display("%s: MATMUL took %0d cycles, expected %0d + overhead", name, t1 - t0, expect_cyc);
    end

    got = 0;
    while (got < rows * TOK) begin
      @(negedge clk);
      #2;
      if (m_tvalid && m_tready) begin
        checks++;
        if (!close(f32_to_real(m_tdata), exp[got], mag[got]) || m_tlast != (got == rows * TOK - 1)) begin
          failures++;
          $display("%s out %0d: got %g expected %g", name, got, f32_to_real(m_tdata), exp[got]);
        end
        got++;
      end
    end
    $display("%s: %0d outputs, MATMUL %0d cycles (%0d MAC per cycle)", name, rows * TOK, t1 - t0,
             (rows * TOK * k * 256) / (t1 - t0));
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    run_tile("GPT-2 d=768",            1'b1,  3, 85);
    run_tile("GPT-2 d=3072",           1'b0, 12, 21);
    run_tile("TinyLlama/MobileLLaMA d=2048", 1'b0,  8, 32);
    run_tile("TinyLlama/MobileLLaMA d=5632", 1'b1, 22, 11);
    repeat (20) @(posedge clk);
    checks++;
    if (!idle) begin failures++; $display("not idle at the end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

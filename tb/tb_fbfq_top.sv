// tb_fbfq_top: end-to-end test of the F-BFQ accelerator at its default sizes.
//
// Plays the host driver: builds instruction streams with random Q3_K / Q2_K
// weight super-blocks and Q8_K input super-blocks, sends them over the input
// stream with random gaps, collects the float32 outputs with random
// back-pressure and compares them with double-precision reference dot
// products. The program covers:
//   layer A  Q3_K, k_sb=2, 3x2 outputs, one opcode per word
//   layer B  Q2_K (variant switch), combined opcode word 0x0F, then a second
//            depth tile (0x06, 0x08) accumulating into the same outputs,
//            then STORE
// Each mechanism (variant switch, combined opcode word, accumulation over two
// MATMULs, input and output stream stalls) is counted; one that never
// happened counts as a failure.
module tb_fbfq_top;
  import fbfq_pkg::*;
  import fbfq_tb_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic [31:0] s_tdata = '0;
  logic        s_tvalid = 1'b0;
  logic        s_tready;
  logic [31:0] m_tdata;
  logic        m_tvalid, m_tlast;
  logic        m_tready = 1'b0;
  logic        idle;

  int checks = 0, failures = 0;
  int n_switch = 0, n_combined = 0, n_accum = 0, n_in_stall = 0, n_out_stall = 0;

  always #5 clk = ~clk;

  fbfq_top dut (
    .clk, .rst_n,
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tvalid(m_tvalid), .m_axis_tlast(m_tlast),
    .m_axis_tready(m_tready), .idle
  );

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stimulus changes at the falling edge; handshakes are judged just after it
  always @(negedge clk) begin
    m_tready = ($urandom_range(0, 3) != 0);
    #1;
    if (s_tvalid && !s_tready) n_in_stall++;
    if (m_tvalid && !m_tready) n_out_stall++;
  end

  task automatic send(input logic [31:0] w);
    @(negedge clk);
    while ($urandom_range(0, 7) == 0) @(negedge clk);
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

  task automatic send_cfg(input bit q3, input int k, input int m, input int n);
    send(32'(q3));
    send(32'(k));
    send(32'(m));
    send(32'(n));
  endtask

  task automatic send_sb(input sb_t s, input sbkind_e kind);
    for (int w = 0; w < words_of(kind); w++) send(sb_word(s, w));
  endtask

  task automatic collect(input int cnt, input real exp[], input real mag[], input string tag);
    int got = 0;
    while (got < cnt) begin
      @(negedge clk);
      #2;
      if (m_tvalid && m_tready) begin
        real r;
        r = f32_to_real(m_tdata);
        checks++;
        if (!close(r, exp[got], mag[got])) begin
          failures++;
          $display("%s out %0d: got %g expected %g", tag, got, r, exp[got]);
        end
        checks++;
        if (m_tlast != (got == cnt - 1)) begin
          failures++;
          $display("%s out %0d: tlast %0b", tag, got, m_tlast);
        end
        got++;
      end
    end
  endtask

  sb_t wA[3][2], yA[2][2];
  sb_t wB[2][2], yB[2][2];   // [row/col][depth tile]
  real expA[], magA[], expB[], magB[];

  initial begin
    real mg;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    // ---------------- layer A: Q3_K ----------------
    for (int m = 0; m < 3; m++) for (int k = 0; k < 2; k++) wA[m][k] = gen_q3();
    for (int n = 0; n < 2; n++) for (int k = 0; k < 2; k++) yA[n][k] = gen_q8();
    expA = new[6];
    magA = new[6];
    for (int m = 0; m < 3; m++)
      for (int n = 0; n < 2; n++) begin
        expA[m*2+n] = 0.0;
        magA[m*2+n] = 0.0;
        for (int k = 0; k < 2; k++) begin
          expA[m*2+n] += ref_dot(wA[m][k], yA[n][k], 1'b1, mg);
          magA[m*2+n] += mg;
        end
      end
    send(32'h01);
    send_cfg(1'b1, 2, 3, 2);
    send(32'h02);
    for (int m = 0; m < 3; m++) for (int k = 0; k < 2; k++) send_sb(wA[m][k], SB_Q3);
    send(32'h04);
    for (int n = 0; n < 2; n++) for (int k = 0; k < 2; k++) send_sb(yA[n][k], SB_Q8);
    send(32'h08);
    send(32'h10);
    collect(6, expA, magA, "Q3");

    // ---------------- layer B: Q2_K, two depth tiles ----------------
    for (int m = 0; m < 2; m++) for (int t = 0; t < 2; t++) wB[m][t] = gen_q2();
    for (int n = 0; n < 2; n++) for (int t = 0; t < 2; t++) yB[n][t] = gen_q8();
    expB = new[4];
    magB = new[4];
    for (int m = 0; m < 2; m++)
      for (int n = 0; n < 2; n++) begin
        expB[m*2+n] = 0.0;
        magB[m*2+n] = 0.0;
        for (int t = 0; t < 2; t++) begin
          expB[m*2+n] += ref_dot(wB[m][t], yB[n][t], 1'b0, mg);
          magB[m*2+n] += mg;
        end
      end
    wait (dut.cfg.wtype == WT_Q3);
    send(32'h0F);                   // CONFIG, LOAD_W, LOAD_I, MATMUL in one word
    n_combined++;
    send_cfg(1'b0, 1, 2, 2);
    for (int m = 0; m < 2; m++) send_sb(wB[m][0], SB_Q2);
    for (int n = 0; n < 2; n++) send_sb(yB[n][0], SB_Q8);
    if (dut.cfg.wtype == WT_Q2) n_switch++;
    send(32'h06);                   // second depth tile
    for (int m = 0; m < 2; m++) send_sb(wB[m][1], SB_Q2);
    for (int n = 0; n < 2; n++) send_sb(yB[n][1], SB_Q8);
    send(32'h08);
    n_accum++;
    send(32'h10);
    collect(4, expB, magB, "Q2");

    // idle after the program
    repeat (20) @(posedge clk);
    checks++;
    if (!idle) begin
      failures++;
      $display("accelerator not idle at the end");
    end

    // every mechanism must have occurred
    $display("mechanisms: switch=%0d combined=%0d accumulate=%0d in_stall=%0d out_stall=%0d",
             n_switch, n_combined, n_accum, n_in_stall, n_out_stall);
    checks += 5;
    if (n_switch == 0)    failures++;
    if (n_combined == 0)  failures++;
    if (n_accum == 0)     failures++;
    if (n_in_stall == 0)  failures++;
    if (n_out_stall == 0) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

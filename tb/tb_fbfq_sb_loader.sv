// tb_fbfq_sb_loader: fills behavioural weight and input FIFOs with random
// Q3_K, Q8_K and then (after clearing and switching weight_type) Q2_K
// super-blocks, word j in FIFO j mod 4 as the data loader does. Every cache
// write (N block rows at once) is compared with the reference rows for its
// super-block and blocks g*N+p, the write group address with sb*16/N+g, and
// the counters with the number of super-blocks sent. With data waiting, a
// Q3_K super-block must take 28/4 + 16/4 + 1 = 12 cycles.
module tb_fbfq_sb_loader;
  import fbfq_pkg::*;
  import fbfq_tb_pkg::*;
  localparam int N = 4, CAP = 8;
  logic clk = 0, rst_n = 0;
  wtype_e wtype = WT_Q3;
  logic clr_w = 0, clr_i = 0;
  logic [N-1:0] w_empty, w_rd, i_empty, i_rd;
  logic [N-1:0][31:0] w_rdata, i_rdata;
  logic wc_row_we, wc_sb_we, ic_row_we, ic_sb_we;
  localparam int NG = 16 / N;
  logic [$clog2(CAP*NG)-1:0] wc_row_waddr, ic_row_waddr;
  logic [$clog2(CAP)-1:0] wc_sb_waddr, ic_sb_waddr;
  w_row_t [N-1:0] wc_row_wdata;
  i_row_t [N-1:0] ic_row_wdata;
  logic [15:0] wc_sb_scale, wc_sb_min, w_count, i_count;
  logic [31:0] ic_i_scale;
  logic idle;
  int checks = 0, failures = 0;

  logic [31:0] wq[N][$], iq[N][$];
  sb_t wsb[$], isb[$];
  bit  wq3 = 1;

  always #5 clk = ~clk;
  fbfq_sb_loader #(.N(N), .W_SB_CAP(CAP), .I_SB_CAP(CAP)) dut (.*);

  always_comb for (int f = 0; f < N; f++) begin
    w_empty[f] = (wq[f].size() == 0);
    i_empty[f] = (iq[f].size() == 0);
    w_rdata[f] = w_empty[f] ? 32'd0 : wq[f][0];
    i_rdata[f] = i_empty[f] ? 32'd0 : iq[f][0];
  end

  always @(posedge clk) if (rst_n) begin
    for (int f = 0; f < N; f++) begin
      if (w_rd[f]) void'(wq[f].pop_front());
      if (i_rd[f]) void'(iq[f].pop_front());
    end
    if (wc_row_we) begin
      int sbi, g;
      sbi = int'(wc_row_waddr) / NG; g = int'(wc_row_waddr) % NG;
      for (int p = 0; p < N; p++) begin
        checks++;
        if (sbi != int'(w_count) || wc_row_wdata[p] !== ref_w_row(wsb[sbi], wq3, g*N+p)) begin
          failures++;
          $display("weight row sb %0d blk %0d wrong", sbi, g*N+p);
        end
      end
      if (wc_sb_we) begin
        checks++;
        if (wc_sb_scale != {wsb[sbi][wq3 ? 109 : 81], wsb[sbi][wq3 ? 108 : 80]} ||
            (!wq3 && wc_sb_min != {wsb[sbi][83], wsb[sbi][82]})) begin
          failures++;
          $display("weight sb %0d scales wrong", sbi);
        end
      end
    end
    if (ic_row_we) begin
      int sbi, g;
      sbi = int'(ic_row_waddr) / NG; g = int'(ic_row_waddr) % NG;
      for (int p = 0; p < N; p++) begin
        checks++;
        if (sbi != int'(i_count) || ic_row_wdata[p] !== ref_i_row(isb[sbi], g*N+p)) begin
          failures++;
          $display("input row sb %0d blk %0d wrong", sbi, g*N+p);
        end
      end
      if (ic_sb_we) begin
        checks++;
        if (ic_i_scale != {isb[sbi][3], isb[sbi][2], isb[sbi][1], isb[sbi][0]}) begin
          failures++; $display("input scale wrong");
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push(input sb_t s, input sbkind_e k);
    for (int w = 0; w < words_of(k); w++) begin
      if (k == SB_Q8) iq[w % N].push_back(sb_word(s, w));
      else            wq[w % N].push_back(sb_word(s, w));
    end
  endtask

  initial begin
    int t0, t1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 3; i++) begin wsb.push_back(gen_q3()); push(wsb[i], SB_Q3); end
    for (int i = 0; i < 2; i++) begin isb.push_back(gen_q8()); push(isb[i], SB_Q8); end
    wait (w_count == 1);
    t0 = $time;
    wait (w_count == 2);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != 28/N + NG + 1) begin failures++; $display("Q3 SB took %0d cycles", (t1 - t0) / 10); end
    wait (i_count == 2 && idle);
    checks++;
    if (w_count != 3) begin failures++; $display("w_count %0d", w_count); end
    // switch to Q2_K and restart the weight cache
    @(negedge clk);
    clr_w = 1; wtype = WT_Q2; wq3 = 0;
    @(negedge clk);
    clr_w = 0;
    checks++;
    if (w_count != 0) begin failures++; $display("clear failed"); end
    wsb.delete();
    for (int i = 0; i < 4; i++) begin wsb.push_back(gen_q2()); push(wsb[i], SB_Q2); end
    wait (w_count == 4);
    repeat (5) @(posedge clk);
    checks++;
    if (!idle || i_count != 2) begin failures++; $display("end state idle=%0b i_count=%0d", idle, i_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

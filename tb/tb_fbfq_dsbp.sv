// tb_fbfq_dsbp: loads random weight and input super-blocks into the DSBP
// through behavioural FIFOs, then issues one command per (m, n) output back to
// back and compares each result with the reference dot product over k_sb
// super-blocks. Runs a Q3_K tile and then, after clearing, a Q2_K tile. The
// throughput is checked too: with commands always waiting, the last result of
// M*N outputs must appear (16/4)*k_sb*M*N + 4 cycles after the first command
// (4 blocks are computed per cycle).
module tb_fbfq_dsbp;
  import fbfq_pkg::*;
  import fbfq_tb_pkg::*;
  localparam int N = 4, CAP = 16;
  logic clk = 0, rst_n = 0;
  wtype_e wtype = WT_Q3;
  logic clr_w = 0, clr_i = 0;
  logic [N-1:0] w_empty, w_rd, i_empty, i_rd;
  logic [N-1:0][31:0] w_rdata, i_rdata;
  logic [15:0] w_count, i_count;
  logic loader_idle;
  logic cmd_valid = 0, cmd_ready;
  logic [15:0] cmd_m = 0, cmd_n = 0, k_sb = 1;
  logic res_valid;
  logic [31:0] res_data;
  int checks = 0, failures = 0;
  int cyc = 0;

  logic [31:0] wq[N][$], iq[N][$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  fbfq_dsbp #(.N(N), .W_SB_CAP(CAP), .I_SB_CAP(CAP)) dut (.*);

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
  end

  initial begin
    repeat (50000) @(posedge clk);
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

  task automatic run_tile(input bit q3, input int M, input int NC, input int K);
    sb_t w[$], y[$];
    real e[$], mg[$];
    int  first_cyc, got;
    @(negedge clk);
    wtype = q3 ? WT_Q3 : WT_Q2;
    clr_w = 1; clr_i = 1;
    @(negedge clk);
    clr_w = 0; clr_i = 0;
    for (int i = 0; i < M*K; i++) begin w.push_back(q3 ? gen_q3() : gen_q2()); push(w[i], q3 ? SB_Q3 : SB_Q2); end
    for (int i = 0; i < NC*K; i++) begin y.push_back(gen_q8()); push(y[i], SB_Q8); end
    for (int m = 0; m < M; m++)
      for (int n = 0; n < NC; n++) begin
        real s, t, mm;
        s = 0; t = 0;
        for (int k = 0; k < K; k++) begin s += ref_dot(w[m*K+k], y[n*K+k], q3, mm); t += mm; end
        e.push_back(s); mg.push_back(t);
      end
    wait (int'(w_count) == M*K && int'(i_count) == NC*K);
    k_sb = 16'(K);
    first_cyc = -1;
    got = 0;
    fork
      begin
        for (int m = 0; m < M; m++)
          for (int n = 0; n < NC; n++) begin
            @(negedge clk);
            cmd_valid = 1; cmd_m = 16'(m); cmd_n = 16'(n);
            #1;
            while (!cmd_ready) begin @(negedge clk); #1; end
            @(posedge clk);
            #1;
            if (first_cyc < 0) first_cyc = cyc;
            cmd_valid = 0;
          end
      end
      begin
        while (got < M*NC) begin
          @(posedge clk); #1;
          if (res_valid) begin
            real r;
            r = f32_to_real(res_data);
            checks++;
            if (!close(r, e[got], mg[got])) begin
              failures++;
              $display("q3=%0b out %0d: %g expected %g", q3, got, r, e[got]);
            end
            got++;
          end
        end
      end
    join
    checks++;
    if (cyc - first_cyc != (16/N)*K*M*NC + 4) begin
      failures++;
      $display("tile took %0d cycles, expected %0d", cyc - first_cyc, (16/N)*K*M*NC + 4);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_tile(1'b1, 2, 3, 2);
    run_tile(1'b0, 3, 2, 2);
    run_tile(1'b1, 1, 1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fbfq_vcu: streams cache row groups (N blocks per cycle) of random Q3_K
// and Q2_K super-blocks and Q8_K inputs into the VCU, several outputs back to back, and compares each
// float32 result with the double-precision reference dot product. Also checks
// that out_valid rises 3 clock edges after the edge that takes the last group.
module tb_fbfq_vcu;
  import fbfq_pkg::*;
  import fbfq_tb_pkg::*;
  localparam int N = N_FIFO;
  logic clk = 0, rst_n = 0;
  wtype_e wtype = WT_Q3;
  logic in_valid = 0, blk_first = 0, blk_last = 0, sb_first = 0, sb_last = 0;
  w_row_t [N-1:0] w_row = '0;
  i_row_t [N-1:0] i_row = '0;
  logic [15:0] sb_scale = 0, sb_min = 0;
  logic [31:0] i_scale = 0;
  logic out_valid;
  logic [31:0] acc;
  int checks = 0, failures = 0;

  real exp_q[$], mag_q[$];
  int  last_t[$];
  int  cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  fbfq_vcu #(.N(N)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker
  always @(posedge clk) if (rst_n) begin
    #1;
    if (out_valid) begin
      real r;
      r = f32_to_real(acc);
      checks += 2;
      if (exp_q.size() == 0) begin failures++; $display("unexpected result"); end
      else begin
        if (!close(r, exp_q[0], mag_q[0])) begin
          failures++;
          $display("result %g expected %g", r, exp_q[0]);
        end
        if (cyc - last_t[0] != 3) begin
          failures++;
          $display("latency %0d", cyc - last_t[0]);
        end
        void'(exp_q.pop_front()); void'(mag_q.pop_front()); void'(last_t.pop_front());
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < 24; o++) begin
      int  k_sb;
      bit  q3;
      real e, m, mg;
      q3 = (o / 6) % 2 == 0;
      k_sb = 1 + (o % 3);
      e = 0.0; m = 0.0;
      // wait for the pipeline to drain before switching variant
      if (o % 6 == 0) begin
        @(negedge clk);
        in_valid = 0;
        repeat (8) @(negedge clk);
      end
      wtype = q3 ? WT_Q3 : WT_Q2;
      for (int k = 0; k < k_sb; k++) begin
        sb_t w, y;
        w = q3 ? gen_q3() : gen_q2();
        y = gen_q8();
        e += ref_dot(w, y, q3, mg);
        m += mg;
        for (int g = 0; g < 16 / N; g++) begin
          @(negedge clk);
          in_valid  = 1;
          blk_first = (g == 0); blk_last = (g == 16 / N - 1);
          sb_first  = (k == 0); sb_last  = (k == k_sb - 1);
          for (int p = 0; p < N; p++) begin
            w_row[p] = ref_w_row(w, q3, g * N + p);
            i_row[p] = ref_i_row(y, g * N + p);
          end
          sb_scale  = q3 ? {w[109], w[108]} : {w[81], w[80]};
          sb_min    = q3 ? 16'd0 : {w[83], w[82]};
          i_scale   = {y[3], y[2], y[1], y[0]};
        end
      end
      exp_q.push_back(e); mag_q.push_back(m); last_t.push_back(cyc + 1);
      // random gap between outputs, sometimes none
      if ($urandom_range(0, 1)) begin
        @(negedge clk);
        in_valid = 0;
        repeat ($urandom_range(0, 3)) @(negedge clk);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

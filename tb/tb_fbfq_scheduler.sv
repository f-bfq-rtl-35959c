// tb_fbfq_scheduler: the testbench plays the DSBP (accepting commands with
// random back-pressure and answering each after a delay with a float value
// that encodes m and n) and the SB loader counters. Checks that no command is
// issued before the caches hold m_rows*k_sb and n_cols*k_sb super-blocks,
// that commands come row-major, that two MATMULs accumulate into the output
// buffer, that STORE streams m_rows*n_cols words in order with tlast on the
// last under random tready, and that a STORE empties the buffer.
module tb_fbfq_scheduler;
  import fbfq_pkg::*;
  import fbfq_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_t cfg = '0;
  logic mm_start = 0, mm_done, st_start = 0, st_done;
  logic [15:0] w_count = 0, i_count = 0;
  logic cmd_valid, cmd_ready = 0;
  logic [15:0] cmd_m, cmd_n;
  logic res_valid = 0;
  logic [31:0] res_data = 0;
  logic [31:0] m_tdata;
  logic m_tvalid, m_tlast, m_tready = 0, busy;
  int checks = 0, failures = 0;
  int exp_m = 0, exp_n = 0, n_stall = 0;
  logic [31:0] pend[$];

  always #5 clk = ~clk;
  fbfq_scheduler #(.OUT_CAP(64)) dut (.*);

  function automatic logic [31:0] val(input int m, input int n);
    return {1'b0, 8'(120 + m), 23'(n) << 19};
  endfunction

  // DSBP model: accepts commands, answers in order after a few cycles
  always @(negedge clk) begin
    cmd_ready = ($urandom_range(0, 2) != 0);
    m_tready  = ($urandom_range(0, 2) != 0);
    #1;
    if (m_tvalid && !m_tready) n_stall++;
    if (cmd_valid && cmd_ready) begin
      checks++;
      if (32'(w_count) < 32'(cfg.m_rows) * cfg.k_sb || 32'(i_count) < 32'(cfg.n_cols) * cfg.k_sb) begin
        failures++; $display("command before the data was loaded");
      end
      checks++;
      if (int'(cmd_m) != exp_m || int'(cmd_n) != exp_n) begin
        failures++; $display("command (%0d,%0d) expected (%0d,%0d)", cmd_m, cmd_n, exp_m, exp_n);
      end
      pend.push_back(val(cmd_m, cmd_n));
      exp_n++;
      if (exp_n == int'(cfg.n_cols)) begin exp_n = 0; exp_m++; end
    end
  end

  initial begin
    forever begin
      @(negedge clk);
      res_valid = 0;
      if (pend.size() > 0 && $urandom_range(0, 1)) begin
        res_valid = 1;
        res_data  = pend.pop_front();
      end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic matmul();
    exp_m = 0; exp_n = 0;
    @(negedge clk); mm_start = 1;
    @(negedge clk); mm_start = 0;
    repeat (20) @(negedge clk);
    w_count = 16'(cfg.m_rows * cfg.k_sb);
    repeat (10) @(negedge clk);
    i_count = 16'(cfg.n_cols * cfg.k_sb);
    @(posedge clk);
    while (!mm_done) @(posedge clk);
    w_count = 0; i_count = 0;
  endtask

  task automatic store(input int times);   // expected value = times * val
    int got = 0, M, NC;
    M = int'(cfg.m_rows); NC = int'(cfg.n_cols);
    @(negedge clk); st_start = 1;
    @(negedge clk); st_start = 0;
    while (got < M*NC) begin
      #2;
      if (m_tvalid && m_tready) begin
        real e;
        e = times * f32_to_real(val(got / NC, got % NC));
        checks += 2;
        if (f32_to_real(m_tdata) != e) begin
          failures++; $display("out %0d: %g expected %g", got, f32_to_real(m_tdata), e);
        end
        if (m_tlast != (got == M*NC - 1)) begin failures++; $display("tlast wrong at %0d", got); end
        got++;
      end
      @(negedge clk);
    end
    #1;
    checks++;
    if (!st_done) begin failures++; $display("st_done missing"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg.wtype = WT_Q3; cfg.k_sb = 2; cfg.m_rows = 3; cfg.n_cols = 4;
    matmul();
    matmul();
    store(2);          // two MATMULs accumulated
    cfg.m_rows = 2; cfg.n_cols = 3; cfg.k_sb = 1;
    matmul();
    store(1);          // buffer was emptied by the previous STORE
    checks++;
    if (n_stall == 0) begin failures++; $display("no output stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fbfq_instr_decoder: sends instruction programs (single opcodes and
// combined opcode words) with random gaps, while the testbench plays data
// loader and scheduler with random delays. Checks the configuration
// registers, the word counts handed to the loader (m*k*24 Q2_K, m*k*28 Q3_K,
// n*k*76 Q8_K words), that operand words reach the loader in order, that
// actions happen in ascending opcode order, and that no load starts before
// the previous data has drained.
module tb_fbfq_instr_decoder;
  import fbfq_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] s_tdata = 0;
  logic s_tvalid = 0, s_tready;
  cfg_t cfg;
  logic dl_start, dl_is_input, dl_valid, dl_ready = 0, dl_done = 0, drain_idle = 1;
  logic [31:0] dl_words, dl_data;
  logic mm_start, mm_done = 0, st_start, st_done = 0, idle;
  int checks = 0, failures = 0;
  string events[$];
  int dl_left = 0;
  logic [31:0] next_operand = 0;

  always #5 clk = ~clk;
  fbfq_instr_decoder dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog: decoder state %0d, events %p", dut.state, events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // loader / scheduler models
  initial begin
    forever begin
      @(negedge clk);
      dl_done = 0; mm_done = 0; st_done = 0;
      dl_ready = (dl_left > 0) && ($urandom_range(0, 3) != 0);
      drain_idle = ($urandom_range(0, 2) != 0);
      #1;
      if (dl_valid && dl_ready) begin
        checks++;
        if (dl_data != next_operand) begin failures++; $display("operand %h expected %h", dl_data, next_operand); end
        next_operand++;
        dl_left--;
        if (dl_left == 0) begin
          @(posedge clk); #1;
          dl_ready = 0;
          @(negedge clk);
          dl_done = 1;
        end
      end
    end
  end

  logic drain_prev = 1'b1;
  always @(posedge clk) drain_prev <= drain_idle;

  always @(posedge clk) if (rst_n) begin
    if (dl_start) begin
      checks++;
      if (!drain_prev) begin failures++; $display("load started while not drained"); end
      events.push_back(dl_is_input ? "LI" : "LW");
      dl_left <= dl_words;
    end
    if (mm_start) begin
      events.push_back("MM");
      fork begin repeat ($urandom_range(1, 20)) @(negedge clk); #2 mm_done = 1; end join_none
    end
    if (st_start) begin
      events.push_back("ST");
      fork begin repeat ($urandom_range(1, 20)) @(negedge clk); #2 st_done = 1; end join_none
    end
  end

  task automatic send(input logic [31:0] w);
    @(negedge clk);
    while ($urandom_range(0, 3) == 0) @(negedge clk);
    s_tdata = w; s_tvalid = 1;
    #2;
    while (!s_tready) begin @(negedge clk); #2; end
    @(posedge clk);
    #1 s_tvalid = 0;
  endtask

  task automatic send_operands(input int cnt);
    logic [31:0] base;
    base = next_operand;
    for (int i = 0; i < cnt; i++) send(base + i);
  endtask

  task automatic expect_events(input string exp[$]);
    checks++;
    if (events != exp) begin
      failures++;
      $display("events %p expected %p", events, exp);
    end
    events.delete();
  endtask

  task automatic wait_idle();
    repeat (3) @(posedge clk);
    while (!idle) @(posedge clk);
    repeat (30) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // program 1: separate words, Q3
    send(32'h01); send(32'h1); send(32'd3); send(32'd2); send(32'd5);
    wait_idle();
    checks++;
    if (cfg.wtype != WT_Q3 || cfg.k_sb != 3 || cfg.m_rows != 2 || cfg.n_cols != 5) begin
      failures++; $display("cfg %p", cfg);
    end
    send(32'h02);
    wait (dl_start); #1;
    checks++;
    if (dl_words != 2*3*28 || dl_is_input) begin failures++; $display("Q3 weight words %0d", dl_words); end
    send_operands(2*3*28);
    send(32'h04);
    wait (dl_start); #1;
    checks++;
    if (dl_words != 5*3*76 || !dl_is_input) begin failures++; $display("input words %0d", dl_words); end
    send_operands(5*3*76);
    send(32'h08);
    send(32'h10);
    wait_idle();
    expect_events('{"LW", "LI", "MM", "ST"});
    // program 2: everything in one word, Q2
    send(32'h1F);
    send(32'h0); send(32'd2); send(32'd4); send(32'd1);
    wait (dl_start); #1;
    checks++;
    if (dl_words != 4*2*24 || dl_is_input) begin failures++; $display("Q2 weight words %0d", dl_words); end
    send_operands(4*2*24);
    wait (dl_start); #1;
    send_operands(1*2*76);
    wait_idle();
    expect_events('{"LW", "LI", "MM", "ST"});
    checks++;
    if (cfg.wtype != WT_Q2 || cfg.k_sb != 2 || cfg.m_rows != 4 || cfg.n_cols != 1) begin
      failures++; $display("cfg %p", cfg);
    end
    // program 3: unusual order within one word is still ascending
    send(32'h18);
    wait_idle();
    expect_events('{"MM", "ST"});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

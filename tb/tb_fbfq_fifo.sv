// tb_fbfq_fifo: random push/pop traffic against a queue model, checking the
// first-word-fall-through data, empty, full and count, and that the FIFO can
// be filled to exactly DEPTH words.
module tb_fbfq_fifo;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [31:0] wr_data = 0, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [31:0] q[$];

  always #5 clk = ~clk;

  fbfq_fifo #(.W(32), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_state();
    checks++;
    if (empty != (q.size() == 0) || full != (q.size() == DEPTH) || int'(count) != q.size()) begin
      failures++;
      $display("flags: empty=%0b full=%0b count=%0d model=%0d", empty, full, count, q.size());
    end
    if (q.size() > 0) begin
      checks++;
      if (rd_data != q[0]) begin
        failures++;
        $display("data %h expected %h", rd_data, q[0]);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      check_state();
      // phases: fill-biased, drain-biased, mixed
      wr_en   = !full  && ($urandom_range(0, 99) < ((cyc / 500) % 2 == 0 ? 70 : 30));
      rd_en   = !empty && ($urandom_range(0, 99) < ((cyc / 500) % 2 == 0 ? 30 : 70));
      wr_data = $urandom;
      @(posedge clk);
      #1;
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
    end
    // fill completely
    @(negedge clk);
    rd_en = 0;
    while (!full) begin
      wr_en = 1; wr_data = $urandom;
      @(posedge clk); #1; q.push_back(wr_data);
      @(negedge clk);
    end
    wr_en = 0;
    checks++;
    if (q.size() != DEPTH) begin failures++; $display("filled %0d", q.size()); end
    check_state();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

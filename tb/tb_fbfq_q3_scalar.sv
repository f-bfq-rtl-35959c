// tb_fbfq_q3_scalar: random super-blocks of 16 (dot, scale) pairs; isum must
// equal sum((scale[5:0] - 32) * dot) one cycle after the last block, and
// first must restart the sum. Blocks are sent with random gaps.
module tb_fbfq_q3_scalar;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0;
  logic signed [15:0] dot = 0;
  logic [7:0] scale = 0;
  logic signed [31:0] isum;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  fbfq_q3_scalar dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int sb = 0; sb < 100; sb++) begin
      exp = 0;
      for (int b = 0; b < 16; b++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; first = (b == 0);
        dot   = 16'($signed($urandom_range(0, 16383)) - 8192);
        scale = 8'($urandom);
        exp  += (longint'(scale[5:0]) - 32) * longint'(dot);
        @(posedge clk); #1;
        in_valid = 0;
      end
      checks++;
      if (longint'(isum) != exp) begin
        failures++;
        $display("sb %0d isum=%0d exp=%0d", sb, isum, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

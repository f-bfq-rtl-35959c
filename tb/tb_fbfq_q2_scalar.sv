// tb_fbfq_q2_scalar: random super-blocks of 16 (dot, scale/min byte, bsum)
// triples; isum must equal sum(scale_lo * dot) and msum sum(scale_hi * bsum)
// one cycle after the last block, with first restarting both sums.
module tb_fbfq_q2_scalar;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0;
  logic signed [15:0] dot = 0, bsum = 0;
  logic [7:0] scale = 0;
  logic signed [31:0] isum, msum;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  fbfq_q2_scalar dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ei, em;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int sb = 0; sb < 100; sb++) begin
      ei = 0; em = 0;
      for (int b = 0; b < 16; b++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; first = (b == 0);
        dot   = 16'($signed($urandom_range(0, 6143)));
        bsum  = 16'($signed($urandom_range(0, 4095)) - 2048);
        scale = 8'($urandom);
        ei   += longint'(scale[3:0]) * longint'(dot);
        em   += longint'(scale[7:4]) * longint'(bsum);
        @(posedge clk); #1;
        in_valid = 0;
      end
      checks += 2;
      if (longint'(isum) != ei) begin failures++; $display("sb %0d isum=%0d exp=%0d", sb, isum, ei); end
      if (longint'(msum) != em) begin failures++; $display("sb %0d msum=%0d exp=%0d", sb, msum, em); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fbfq_vector_engine: random blocks in both variants; the registered dot
// product must equal the sum of lane products, with Q3_K weights w_high -
// (w_low ? 0 : 4) and Q2_K weights w_high, one cycle after in_valid.
module tb_fbfq_vector_engine;
  import fbfq_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  wtype_e wtype = WT_Q2;
  logic [15:0][1:0] w_high = '0;
  logic [15:0] w_low = '0;
  logic [15:0][7:0] x = '0;
  logic signed [15:0] dot;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  fbfq_vector_engine dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      wtype = wtype_e'(t % 2);
      for (int i = 0; i < 16; i++) begin
        w_high[i] = 2'($urandom); w_low[i] = 1'($urandom);
        x[i] = (t < 4) ? ((t % 2) ? 8'h80 : 8'h7f) : 8'($urandom);
        if (t < 4) begin w_high[i] = (t % 2) ? 2'd0 : 2'd3; w_low[i] = (t < 2) ? 1'b0 : 1'b1; end
      end
      exp = 0;
      for (int i = 0; i < 16; i++) begin
        int q;
        q = int'(w_high[i]);
        if (wtype == WT_Q3 && !w_low[i]) q -= 4;
        exp += q * int'($signed(x[i]));
      end
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid || int'(dot) != exp) begin
        failures++;
        $display("t=%0d dot=%0d exp=%0d valid=%0b", t, dot, exp, out_valid);
      end
    end
    @(posedge clk); #1;
    checks++;
    if (out_valid) begin failures++; $display("out_valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

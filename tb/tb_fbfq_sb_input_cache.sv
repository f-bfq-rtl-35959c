// tb_fbfq_sb_input_cache: writes random input rows (N partitions per write)
// and fp32 scales, reads whole groups back in random order and checks that
// partition p of group g returns block g*N+p, plus the one-cycle read latency.
module tb_fbfq_sb_input_cache;
  import fbfq_pkg::*;
  localparam int CAP = 8;
  localparam int N   = N_FIFO;
  localparam int G   = CAP*16/N;
  logic clk = 0;
  logic row_we = 0, sb_we = 0;
  logic [$clog2(G)-1:0] row_waddr = 0, row_raddr = 0;
  logic [$clog2(CAP)-1:0] sb_waddr = 0, sb_raddr = 0;
  i_row_t [N-1:0] row_wdata = '0, row_rdata;
  logic [31:0] i_scale_wdata = 0, i_scale_rdata;
  int checks = 0, failures = 0;
  i_row_t rows[CAP*16];
  logic [31:0] sc[CAP];

  always #5 clk = ~clk;
  fbfq_sb_input_cache #(.N(N), .I_SB_CAP(CAP)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int g = 0; g < G; g++) begin
      @(negedge clk);
      row_we = 1; row_waddr = g[$clog2(G)-1:0];
      for (int p = 0; p < N; p++) begin
        row_wdata[p] = {$urandom, $urandom, $urandom, $urandom, $urandom};
        rows[g*N+p] = row_wdata[p];
      end
      sb_we = ((g*N) % 16 == 0); sb_waddr = $clog2(CAP)'((g*N)/16);
      i_scale_wdata = $urandom;
      if (sb_we) sc[(g*N)/16] = i_scale_wdata;
    end
    @(negedge clk);
    row_we = 0; sb_we = 0;
    for (int t = 0; t < 500; t++) begin
      int g;
      g = $urandom_range(0, G-1);
      @(negedge clk);
      row_raddr = g[$clog2(G)-1:0]; sb_raddr = $clog2(CAP)'((g*N)/16);
      @(posedge clk); #1;
      checks++;
      for (int p = 0; p < N; p++)
        if (row_rdata[p] !== rows[g*N+p]) begin
          failures++;
          $display("group %0d partition %0d mismatch", g, p);
          break;
        end
      if (i_scale_rdata !== sc[(g*N)/16]) begin
        failures++;
        $display("group %0d scale mismatch", g);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

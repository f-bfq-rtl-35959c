// tb_fbfq_data_loader: random loads of weight and input words with random
// stream gaps and random FIFO-full back-pressure. Word j of each load must be
// written to FIFO (j mod 4) of the right type, never to a full FIFO, with the
// stream data; done must pulse once, right after the last word; a load of zero
// words must finish at once.
module tb_fbfq_data_loader;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic start = 0, is_input = 0;
  logic [31:0] num_words = 0;
  logic beat_valid = 0, beat_ready;
  logic [31:0] beat_data = 0, wr_data;
  logic [N-1:0] w_wr, w_full = '0, i_wr, i_full = '0;
  logic done, busy;
  int checks = 0, failures = 0;
  int n_stall = 0;

  always #5 clk = ~clk;
  fbfq_data_loader #(.N(N)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ld = 0; ld < 40; ld++) begin
      int len, j, ndone;
      len = (ld == 5) ? 0 : $urandom_range(1, 60);
      @(negedge clk);
      start = 1; is_input = 1'($urandom); num_words = len;
      @(posedge clk); #1;
      start = 0;
      j = 0; ndone = done ? 1 : 0;
      while (ndone == 0) begin
        @(negedge clk);
        w_full = N'($urandom) & N'($urandom);
        i_full = N'($urandom) & N'($urandom);
        beat_valid = (j < len) && ($urandom_range(0, 3) != 0);
        beat_data  = $urandom;
        #1;
        if (beat_valid && !beat_ready) n_stall++;
        if (beat_valid && beat_ready) begin
          logic [N-1:0] exp;
          exp = N'(1) << (j % N);
          checks++;
          if ((is_input ? i_wr : w_wr) != exp || (is_input ? w_wr : i_wr) != '0 || wr_data != beat_data) begin
            failures++;
            $display("load %0d word %0d: w_wr=%b i_wr=%b", ld, j, w_wr, i_wr);
          end
          checks++;
          if ((w_wr & w_full) != '0 || (i_wr & i_full) != '0) begin
            failures++;
            $display("write to a full FIFO");
          end
          j++;
        end else begin
          checks++;
          if (w_wr != '0 || i_wr != '0) begin failures++; $display("write without handshake"); end
        end
        @(posedge clk); #1;
        if (done) ndone++;
        if (j > len) break;
      end
      beat_valid = 0;
      checks++;
      if (j != len) begin failures++; $display("load %0d: done after %0d of %0d", ld, j, len); end
      @(posedge clk); #1;
      checks++;
      if (done || busy) begin failures++; $display("done repeated / busy after done"); end
    end
    checks++;
    if (n_stall == 0) begin failures++; $display("no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// fbfq_data_loader: maps the operand words that follow a LOAD_W or LOAD_I
// instruction into the weight or the input data FIFOs.
//
// On start it is told the type (weight or input) and how many stream words to
// expect. Word j of the load goes to FIFO (j mod N) of that type, so that
// consecutive words of a super-block are spread over N FIFOs and can be read
// back N at a time. The stream stalls (beat_ready low) while the target FIFO
// is full. done pulses one cycle after the last word was written (or right
// after start for an empty load). Round-robin spreading over N FIFOs follows
// the source description; N = 4 and the word granularity are this design's
// choice.
module fbfq_data_loader
  import fbfq_pkg::*;
#(
  parameter int unsigned N = N_FIFO
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          is_input,
  input  logic [31:0]   num_words,
  input  logic          beat_valid,
  input  logic [31:0]   beat_data,
  output logic          beat_ready,
  output logic [N-1:0]  w_wr,
  input  logic [N-1:0]  w_full,
  output logic [N-1:0]  i_wr,
  input  logic [N-1:0]  i_full,
  output logic [31:0]   wr_data,
  output logic          done,
  output logic          busy
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          to_input;
  logic [31:0]   remaining;
  logic [IW-1:0] idx;

  wire tgt_full = to_input ? i_full[idx] : w_full[idx];
  assign beat_ready = busy && !tgt_full;
  assign wr_data    = beat_data;
  wire take = beat_valid && beat_ready;

  always_comb begin
    w_wr = '0;
    i_wr = '0;
    if (take) begin
      if (to_input) i_wr[idx] = 1'b1;
      else          w_wr[idx] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      to_input  <= 1'b0;
      remaining <= '0;
      idx       <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        to_input  <= is_input;
        remaining <= num_words;
        idx       <= '0;
        busy      <= (num_words != 0);
        done      <= (num_words == 0);
      end else if (take) begin
        remaining <= remaining - 1'b1;
        idx       <= (32'(idx) == N-1) ? '0 : idx + 1'b1;
        if (remaining == 32'd1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule

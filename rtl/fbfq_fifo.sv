// fbfq_fifo: synchronous first-word-fall-through FIFO, used for the weight and
// input data FIFOs that sit between the Data Loader and the Dynamic SB Loader.
//
// rd_data always shows the oldest word while empty is low; rd_en pops it.
// A push and a pop may happen in the same cycle. Pushing when full or popping
// when empty is a protocol error (checked by assertions) and is ignored.
// Depth and width are this design's choice; the FIFOs are only named, not
// sized, in the source description. Reset empties the FIFO. rst_n is both
// the flops' asynchronous reset and the disable of the assertions, which a
// lint tool reports as a net used synchronously and asynchronously; the
// assertions generate no logic, so this is harmless.
module fbfq_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 512
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [W-1:0]               wr_data,
  output logic                       full,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wptr, rptr;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rptr];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_wr) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_rd) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + CW'(do_wr) - CW'(do_rd);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));

endmodule

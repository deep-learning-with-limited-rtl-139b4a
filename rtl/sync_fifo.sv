// sync_fifo: single-clock FIFO queue, the block-RAM FIFO used at every edge of
// the systolic array (one per row of A, one per column of B, one per output
// column of C).
//
// A circular buffer of DEPTH words with read and write pointers and an
// occupancy counter. The head word is always visible on rdata while the queue
// is not empty (show-ahead), so a consumer reads and pops in the same cycle.
// push and pop may come in the same cycle. Pushing when full or popping when
// empty is a protocol error, caught by assertions.
// The edge FIFOs follow the paper; depth and show-ahead read are this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 512
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           wdata,
  input  logic                       pop,
  output logic [WIDTH-1:0]           rdata,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wptr, rptr;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= inc(wptr);
      if (pop)  rptr <= inc(rptr);
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  assign rdata = mem[rptr];
  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule

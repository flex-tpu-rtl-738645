// sync_fifo: single-clock FIFO used in the operand FIFO banks.
//
// DEPTH entries of WIDTH bits in a circular buffer. push writes wdata at
// the clock edge; rdata always shows the oldest entry (first-word
// fall-through) and pop removes it at the clock edge. Pushing into a full
// FIFO or popping an empty one is a usage error and is flagged by
// assertions. Reset empties the FIFO.
//
// The paper places FIFO buffers between the memories and the array; this
// particular FIFO (fall-through, circular buffer) is this design's own.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             empty,
  output logic             full
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    wptr, rptr;
  logic [PW:0]      count;

  assign rdata = mem[rptr];
  assign empty = (count == 0);
  assign full  = (count == (PW+1)'(DEPTH));

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= incr(wptr);
      if (pop)  rptr <= incr(rptr);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= wdata;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule

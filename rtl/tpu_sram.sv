// tpu_sram: on-chip buffer used for the weight, input (IFMap) and output
// (OFMap) memories.
//
// DEPTH words of WIDTH bits, one write port and one read port. A write
// (we, waddr, wdata) takes effect at the clock edge. A read (re, raddr)
// returns the word on rdata in the following cycle; rdata holds its value
// while re is low. Writing and reading the same address in one cycle
// returns the old word. Written as a plain array so that synthesis can map
// it to an SRAM macro; the contents are not reset.
//
// The paper names the three memories; size, word width and port count are
// this design's own choices (one operand per array row/column per word).
module tpu_sram #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule

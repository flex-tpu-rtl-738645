// operand_feeder: DEMUX plus one FIFO per array row (or column).
//
// Feeds one edge of the systolic array from a memory. A memory word holds
// one operand per lane; on push the DEMUX hands lane i to FIFO i (lanes
// outside lane_mask are written as zero, so unused rows/columns of a small
// layer multiply by zero). FIFO i is popped exactly i+1 cycles after the
// word was pushed, so a word pushed on cycle t leaves lane 0 on cycle t+1,
// lane 1 on cycle t+2 and so on: the diagonal skew a systolic array needs.
// A lane that is not popped outputs zero. FIFO i never holds more than i+1
// words, so DEPTH = N is sufficient for any stream length.
//
// Interface: push/word/lane_mask in, lane_out[i] to row (or column) i of
// the array, one operand per cycle per lane.
//
// From the paper: a DEMUX between each memory and a bank of FIFOs, one FIFO
// per row (left edge) or column (top edge), Fig. 4. Own choices: word
// layout, FIFO depth, skew produced by the pop schedule, lane masking.
module operand_feeder #(
  parameter int unsigned N      = 32,
  parameter int unsigned DATA_W = 8,
  parameter int unsigned DEPTH  = N
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [N-1:0][DATA_W-1:0] word,
  input  logic [N-1:0]             lane_mask,
  output logic [N-1:0][DATA_W-1:0] lane_out
);

  // pop_sched[i] is push delayed by i+1 cycles.
  logic [N-1:0] pop_sched;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pop_sched <= '0;
    else        pop_sched <= {pop_sched[N-2:0], push};
  end

  for (genvar i = 0; i < N; i++) begin : g_lane
    logic [DATA_W-1:0] din, head;
    logic              empty_unused, full_unused;

    assign din = lane_mask[i] ? word[i] : '0;   // DEMUX lane i

    sync_fifo #(.WIDTH(DATA_W), .DEPTH(DEPTH)) u_fifo (
      .clk   (clk),
      .rst_n (rst_n),
      .push  (push),
      .wdata (din),
      .pop   (pop_sched[i]),
      .rdata (head),
      .empty (empty_unused),
      .full  (full_unused)
    );

    assign lane_out[i] = pop_sched[i] ? head : '0;
  end

endmodule

// systolic_array: the N x N grid of reconfigurable processing elements.
//
// Every PE is a flex_pe. Operands on h travel left to right (entering on the
// left edge from the left FIFO bank), operands on v and the partial sums
// travel top to bottom (v entering on the top edge from the top FIFO bank).
// The top row's partial-sum inputs are zero. The output registers of the
// bottom row leave the array as psum_out, one per column, towards the
// output MUX. Each PE also receives its own stationary operand from the
// Weight/IFMap register file (stat[i][j] for PE(i,j)), and all PEs share
// the multiplexer selects from the CMU.
//
// Timing: an operand entering row i on cycle t reaches PE(i,j) on cycle
// t+j. In IS/WS, with row i fed one cycle later than row i-1, the column-j
// result for stream element e appears on psum_out[j] N+j cycles after
// element e entered row 0. In OS the results stay in the PEs until the
// read-out shifts them out through the bottom row, last row first.
//
// From the paper: the N x N grid with rightward and downward links and
// FIFO-fed left and top edges (Fig. 4). Own choice: which PE port faces
// which neighbour, and the zero partial sum at the top edge.
module systolic_array
  import flex_tpu_pkg::*;
#(
  parameter int unsigned N      = 32,
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  pe_cfg_t                            cfg,
  input  logic [N-1:0][DATA_W-1:0]           h_in,
  input  logic [N-1:0][DATA_W-1:0]           v_in,
  input  logic [N-1:0][N-1:0][DATA_W-1:0]    stat,
  output logic [N-1:0][ACC_W-1:0]            psum_out
);

  // h[i][j] enters PE(i,j) from the left; v[i][j] and p[i][j] from above.
  // The right-most h and bottom v outputs leave nowhere (no neighbour).
  logic [N-1:0][N:0][DATA_W-1:0] h;
  logic [N:0][N-1:0][DATA_W-1:0] v;
  logic [N:0][N-1:0][ACC_W-1:0]  p;

  for (genvar i = 0; i < N; i++) begin : g_left
    assign h[i][0] = h_in[i];
  end
  for (genvar j = 0; j < N; j++) begin : g_top
    assign v[0][j]   = v_in[j];
    assign p[0][j]   = '0;
    assign psum_out[j] = p[N][j];
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      flex_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .cfg     (cfg),
        .stat_in (stat[i][j]),
        .v_in    (v[i][j]),
        .h_in    (h[i][j]),
        .psum_in (p[i][j]),
        .v_out   (v[i+1][j]),
        .h_out   (h[i][j+1]),
        .acc_out (p[i+1][j])
      );
    end
  end

endmodule

// wi_regfile: the Weight/IFMap register file.
//
// One DATA_W-bit register per PE holds that PE's stationary operand: a
// weight in WS, an IFMap value in IS (unused in OS). The main controller
// writes one array row per cycle (we, wrow, wdata with lane j for column
// j); every register drives its own PE directly through q[i][j], so the
// whole array sees the stationary operands in parallel. A write takes
// effect at the clock edge; q changes the cycle after.
//
// From the paper: a register file of stationary weights or IFMaps whose
// output ports are distributed among the PEs, written by the main
// controller. Own choice: row-wide writes and reset to zero.
module wi_regfile #(
  parameter int unsigned N      = 32,
  parameter int unsigned DATA_W = 8
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            we,
  input  logic [$clog2(N)-1:0]            wrow,
  input  logic [N-1:0][DATA_W-1:0]        wdata,
  output logic [N-1:0][N-1:0][DATA_W-1:0] q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
    end else if (we) begin
      q[wrow] <= wdata;
    end
  end

endmodule

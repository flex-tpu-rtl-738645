// output_mux: turns the bottom-row outputs of the array into output-memory
// words.
//
// In IS and WS the results of one output word leave the array staggered:
// column j is one cycle later than column j-1. A delay line of N-1-j
// registers on column j re-aligns them, so the whole word is available
// together N-1 cycles after column 0 produced its part. In OS the read-out
// shifts complete rows out of the bottom edge, already aligned. The MUX
// selects the de-skewed path (os_mode = 0) or the direct path (os_mode =
// 1) and zeroes lanes outside lane_mask. word_out is combinational from
// the selected path; the output memory captures it on its write strobe.
//
// From the paper: a MUX between the bottom PE row and the output memory
// (Fig. 4). Own choice: what it selects between (this reading of the MUX)
// and the de-skew delay lines.
module output_mux #(
  parameter int unsigned N     = 32,
  parameter int unsigned ACC_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    os_mode,
  input  logic [N-1:0]            lane_mask,
  input  logic [N-1:0][ACC_W-1:0] psum_in,
  output logic [N-1:0][ACC_W-1:0] word_out
);

  logic [N-1:0][ACC_W-1:0] deskewed;

  for (genvar j = 0; j < N; j++) begin : g_col
    localparam int unsigned DLY = N - 1 - j;
    if (DLY == 0) begin : g_direct
      assign deskewed[j] = psum_in[j];
    end else begin : g_delay
      logic [DLY:0][ACC_W-1:0] sr;   // sr[0] is the input, sr[DLY] the output
      assign sr[0] = psum_in[j];
      for (genvar k = 1; k <= DLY; k++) begin : g_stage
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) sr[k] <= '0;
          else        sr[k] <= sr[k-1];
        end
      end
      assign deskewed[j] = sr[DLY];
    end
    assign word_out[j] = !lane_mask[j] ? '0 : (os_mode ? psum_in[j] : deskewed[j]);
  end

endmodule

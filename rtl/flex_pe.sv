// flex_pe: one processing element of the Flex-TPU systolic array.
//
// A multiply-accumulate cell with two multiplexers that let the same
// hardware run three dataflows:
//   * MUX 1 picks the multiplier's first operand: the moving operand from
//     the PE above (v_in, select 1) or the stationary value held for this
//     PE in the Weight/IFMap register file (stat_in, select 0).
//   * The multiplier's second operand is always the moving operand from the
//     left (h_in).
//   * MUX 2 picks the adder's second operand: the partial sum arriving from
//     the PE above (psum_in, select 0) or this PE's own output register
//     (select 1, accumulate in place).
// Configurations (selects {sel_mult, sel_acc}):
//   IS  {0,0}  stat_in = IFMap, h_in = weight, partial sums flow down
//   WS  {0,0}  stat_in = weight, h_in = IFMap, partial sums flow down
//   OS  {1,1}  v_in = weight, h_in = IFMap, result stays in acc_out
//   OS read-out {1,0}: with zero operands, acc_out loads psum_in, so the
//   results of a column shift down one row per cycle.
//
// Timing: h_out, v_out and acc_out are registers, so every hop through the
// array costs one cycle; acc_out <= MUX2 + MUX1 * h_in at each rising edge.
//
// From the paper: the two MUXs with their 0/1 input numbering, the
// multiplier/adder/register structure and the select values per dataflow.
// Own choices: n = DATA_W = 8 and m = ACC_W = 32 (the paper gives only the
// symbols), signed arithmetic, asynchronous active-low reset, the separate
// select bits used for the OS read-out.
module flex_pe
  import flex_tpu_pkg::*;
#(
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  pe_cfg_t                  cfg,
  input  logic signed [DATA_W-1:0] stat_in,
  input  logic signed [DATA_W-1:0] v_in,
  input  logic signed [DATA_W-1:0] h_in,
  input  logic signed [ACC_W-1:0]  psum_in,
  output logic signed [DATA_W-1:0] v_out,
  output logic signed [DATA_W-1:0] h_out,
  output logic signed [ACC_W-1:0]  acc_out
);

  logic signed [DATA_W-1:0]   mult_a;
  logic signed [2*DATA_W-1:0] product;
  logic signed [ACC_W-1:0]    addend;
  logic signed [ACC_W-1:0]    sum;

  always_comb begin
    mult_a  = cfg.sel_mult ? v_in : stat_in;          // MUX 1
    product = mult_a * h_in;
    addend  = cfg.sel_acc ? acc_out : psum_in;        // MUX 2
    sum     = addend + ACC_W'(product);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_out   <= '0;
      h_out   <= '0;
      acc_out <= '0;
    end else begin
      v_out   <= v_in;
      h_out   <= h_in;
      acc_out <= sum;
    end
  end

endmodule

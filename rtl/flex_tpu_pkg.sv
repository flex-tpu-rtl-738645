// flex_tpu_pkg: types and constants shared by the Flex-TPU modules.
//
// The Flex-TPU is a systolic-array accelerator whose array can switch, per
// layer and at run time, between three dataflows: input stationary (IS),
// output stationary (OS) and weight stationary (WS). This package holds the
// dataflow encoding, the two multiplexer selects every PE receives, and the
// layer descriptor the host programs into the main controller.
//
// The three dataflows and the 0/1 select values per dataflow follow the
// paper (both PE multiplexers get 0 in IS and WS, 1 in OS). The binary
// encoding of the dataflow, the field widths and the descriptor layout are
// this design's own choices.
package flex_tpu_pkg;

  // Dataflow of one layer.
  typedef enum logic [1:0] {
    DF_IS = 2'd0,   // input stationary: IFMap held in the PEs, weights streamed from the left
    DF_OS = 2'd1,   // output stationary: results accumulate in place, both operands streamed
    DF_WS = 2'd2    // weight stationary: weights held in the PEs, IFMap streamed from the left
  } dataflow_e;

  // The two multiplexer selects of a PE, driven by the CMU.
  typedef struct packed {
    logic sel_mult;  // multiplier operand: 1 = moving operand from above, 0 = stationary register
    logic sel_acc;   // adder operand:      1 = own output register,       0 = partial sum from above
  } pe_cfg_t;

  localparam int unsigned DIM_W  = 16;  // width of the M, K, C fields of a descriptor
  localparam int unsigned BASE_W = 16;  // width of the base-address fields of a descriptor

  // One layer: O (M x C) = X (M x K) * W (K x C), with the memory word
  // address where each matrix starts.
  typedef struct packed {
    dataflow_e         df;
    logic [DIM_W-1:0]  m;
    logic [DIM_W-1:0]  k;
    logic [DIM_W-1:0]  c;
    logic [BASE_W-1:0] x_base;
    logic [BASE_W-1:0] w_base;
    logic [BASE_W-1:0] o_base;
  } layer_desc_t;

  // PE selects for a dataflow; during the OS read-out the adder operand is
  // switched to the partial sum from above so the results shift down.
  function automatic pe_cfg_t pe_cfg_for(dataflow_e df, logic drain);
    pe_cfg_t c;
    c.sel_mult = (df == DF_OS);
    c.sel_acc  = (df == DF_OS) && !drain;
    return c;
  endfunction

endpackage

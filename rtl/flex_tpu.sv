// flex_tpu: top level of the Flex-TPU accelerator.
//
// A systolic-array accelerator whose N x N array of processing elements
// can be switched, for every layer and at run time, between input
// stationary (IS), output stationary (OS) and weight stationary (WS)
// dataflow. Blocks and connections:
//   input memory  --+--> left DEMUX/FIFO bank --> array rows (IFMap in WS/OS)
//   weight memory --+     (weight memory feeds this bank in IS)
//                   +--> top DEMUX/FIFO bank  --> array columns (weights in OS)
//                   +--> Weight/IFMap register file --> every PE (WS: weights,
//                        IS: IFMap)
//   array bottom row --> output MUX (de-skew in IS/WS, direct in OS)
//                    --> output memory
//   main controller: layer descriptors, register-file loads, sequencing
//   CMU: per-layer dataflow table, PE multiplexer selects
//   dataflow generator: memory addresses, FIFO strobes, output writes
//
// Host interface: plain memory write ports for the input and weight
// memories (one N-lane word per write), a read port on the output memory
// (data one cycle after o_re), a descriptor write port, and start /
// num_layers / busy / done. A layer is one matrix product O = X * W; see
// dataflow_generator for the memory layout each dataflow expects and
// main_controller for the sizes each dataflow holds.
//
// Latency of one layer with streamed length L: K cycles of register-file
// load (IS/WS only), two cycles of hand-over, then L + 3N + 1 cycles.
//
// The block set and their connections follow the paper's architecture
// figure. Word widths, memory sizes, the host interface and the choice of
// which memory feeds which bank in IS are this design's own.
module flex_tpu
  import flex_tpu_pkg::*;
#(
  parameter int unsigned N          = 32,
  parameter int unsigned DATA_W     = 8,
  parameter int unsigned ACC_W      = 32,
  parameter int unsigned MEM_DEPTH  = 1024,
  parameter int unsigned MAX_LAYERS = 64,
  localparam int unsigned AW        = $clog2(MEM_DEPTH),
  localparam int unsigned LW        = $clog2(MAX_LAYERS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // input (IFMap) memory write port
  input  logic                     x_we,
  input  logic [AW-1:0]            x_waddr,
  input  logic [N-1:0][DATA_W-1:0] x_wdata,
  // weight memory write port
  input  logic                     w_we,
  input  logic [AW-1:0]            w_waddr,
  input  logic [N-1:0][DATA_W-1:0] w_wdata,
  // output (OFMap) memory read port
  input  logic                     o_re,
  input  logic [AW-1:0]            o_raddr,
  output logic [N-1:0][ACC_W-1:0]  o_rdata,
  // layer descriptors and control
  input  logic                     cfg_we,
  input  logic [LW-1:0]            cfg_layer,
  input  layer_desc_t              cfg_desc,
  input  logic                     start,
  input  logic [LW:0]              num_layers,
  output logic                     busy,
  output logic                     done
);

  // ---------------- control ----------------
  logic          cmu_we;
  logic [LW-1:0] cmu_layer, cur_layer;
  dataflow_e     cmu_df, cur_df;
  pe_cfg_t       pe_cfg;
  logic          ld_re, ld_src_w, rf_we, rf_src_w;
  logic [AW-1:0] ld_raddr;
  logic [$clog2(N)-1:0] rf_row;
  logic          gen_start, gen_done;
  layer_desc_t   gen_desc;

  logic          g_x_re, g_w_re, h_push, v_push, h_src_w, drain, o_we;
  logic [AW-1:0] g_x_raddr, g_w_raddr, o_waddr;
  logic [N-1:0]  h_mask, v_mask, o_mask;

  main_controller #(.N(N), .MAX_LAYERS(MAX_LAYERS), .AW(AW)) u_ctrl (
    .clk, .rst_n,
    .cfg_we, .cfg_layer, .cfg_desc, .start, .num_layers, .busy, .done,
    .cmu_we, .cmu_layer, .cmu_df, .cur_layer, .cur_df,
    .ld_re, .ld_raddr, .ld_src_w, .rf_we, .rf_row, .rf_src_w,
    .gen_start, .gen_desc, .gen_done
  );

  cmu #(.MAX_LAYERS(MAX_LAYERS)) u_cmu (
    .clk, .rst_n,
    .prog_we (cmu_we), .prog_layer (cmu_layer), .prog_df (cmu_df),
    .cur_layer, .drain, .cur_df, .pe_cfg
  );

  dataflow_generator #(.N(N), .AW(AW)) u_gen (
    .clk, .rst_n,
    .start (gen_start), .df (cur_df), .desc (gen_desc),
    .x_re (g_x_re), .x_raddr (g_x_raddr), .w_re (g_w_re), .w_raddr (g_w_raddr),
    .h_push, .v_push, .h_src_w, .h_mask, .v_mask, .o_mask,
    .drain, .o_we, .o_waddr, .done (gen_done)
  );

  // ---------------- memories ----------------
  logic                     x_re, w_re;
  logic [AW-1:0]            x_raddr, w_raddr;
  logic [N-1:0][DATA_W-1:0] x_rdata, w_rdata;
  logic [N-1:0][ACC_W-1:0]  o_wdata;

  // The register-file load and the generator never read in the same cycle.
  assign x_re    = g_x_re | (ld_re & !ld_src_w);
  assign x_raddr = (ld_re & !ld_src_w) ? ld_raddr : g_x_raddr;
  assign w_re    = g_w_re | (ld_re & ld_src_w);
  assign w_raddr = (ld_re & ld_src_w) ? ld_raddr : g_w_raddr;

  tpu_sram #(.WIDTH(N * DATA_W), .DEPTH(MEM_DEPTH)) u_input_mem (
    .clk, .we (x_we), .waddr (x_waddr), .wdata (x_wdata),
    .re (x_re), .raddr (x_raddr), .rdata (x_rdata)
  );

  tpu_sram #(.WIDTH(N * DATA_W), .DEPTH(MEM_DEPTH)) u_weight_mem (
    .clk, .we (w_we), .waddr (w_waddr), .wdata (w_wdata),
    .re (w_re), .raddr (w_raddr), .rdata (w_rdata)
  );

  tpu_sram #(.WIDTH(N * ACC_W), .DEPTH(MEM_DEPTH)) u_output_mem (
    .clk, .we (o_we), .waddr (o_waddr), .wdata (o_wdata),
    .re (o_re), .raddr (o_raddr), .rdata (o_rdata)
  );

  // ---------------- register file, FIFOs, array ----------------
  logic [N-1:0][N-1:0][DATA_W-1:0] stat;
  logic [N-1:0][DATA_W-1:0]        h_edge, v_edge;
  logic [N-1:0][ACC_W-1:0]         bottom;

  wi_regfile #(.N(N), .DATA_W(DATA_W)) u_regfile (
    .clk, .rst_n,
    .we (rf_we), .wrow (rf_row), .wdata (rf_src_w ? w_rdata : x_rdata), .q (stat)
  );

  operand_feeder #(.N(N), .DATA_W(DATA_W)) u_left_fifos (
    .clk, .rst_n,
    .push (h_push), .word (h_src_w ? w_rdata : x_rdata), .lane_mask (h_mask), .lane_out (h_edge)
  );

  operand_feeder #(.N(N), .DATA_W(DATA_W)) u_top_fifos (
    .clk, .rst_n,
    .push (v_push), .word (w_rdata), .lane_mask (v_mask), .lane_out (v_edge)
  );

  systolic_array #(.N(N), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_array (
    .clk, .rst_n, .cfg (pe_cfg), .h_in (h_edge), .v_in (v_edge), .stat, .psum_out (bottom)
  );

  output_mux #(.N(N), .ACC_W(ACC_W)) u_out_mux (
    .clk, .rst_n,
    .os_mode (cur_df == DF_OS), .lane_mask (o_mask), .psum_in (bottom), .word_out (o_wdata)
  );

endmodule

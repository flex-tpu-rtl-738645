// main_controller: runs a network layer by layer.
//
// The host writes one descriptor per layer (cfg_we, cfg_layer, cfg_desc:
// dataflow, sizes M/K/C and base addresses). The controller keeps the
// descriptor and programs the layer's dataflow into the CMU in the same
// cycle: the CMU write port (cmu_we/cmu_layer/cmu_df) is driven straight
// from the configuration write, with no register. On start it executes layers 0 .. num_layers-1:
//   1. If the CMU reports IS or WS for the layer, it loads the Weight/IFMap
//      register file: K words are read, one per cycle, from the weight
//      memory (WS) or input memory (IS) at the layer's base address, and
//      word k is written into register-file row k the cycle after its read.
//   2. It starts the dataflow generator with the layer's descriptor and
//      waits for its done strobe.
// When the last layer is done it pulses done for one cycle; busy is high
// from start until then. start is ignored while busy.
//
// From the paper: the main controller moves data between memories, FIFOs
// and the array, programs the CMU and writes the register file. The state
// machine, host interface and descriptor table are this design's own.
module main_controller
  import flex_tpu_pkg::*;
#(
  parameter int unsigned N          = 32,
  parameter int unsigned MAX_LAYERS = 64,
  parameter int unsigned AW         = 10
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host
  input  logic                          cfg_we,
  input  logic [$clog2(MAX_LAYERS)-1:0] cfg_layer,
  input  layer_desc_t                   cfg_desc,
  input  logic                          start,
  input  logic [$clog2(MAX_LAYERS):0]   num_layers,
  output logic                          busy,
  output logic                          done,
  // CMU
  output logic                          cmu_we,
  output logic [$clog2(MAX_LAYERS)-1:0] cmu_layer,
  output dataflow_e                     cmu_df,
  output logic [$clog2(MAX_LAYERS)-1:0] cur_layer,
  input  dataflow_e                     cur_df,
  // register-file load
  output logic                          ld_re,
  output logic [AW-1:0]                 ld_raddr,
  output logic                          ld_src_w,
  output logic                          rf_we,
  output logic [$clog2(N)-1:0]          rf_row,
  output logic                          rf_src_w,
  // dataflow generator
  output logic                          gen_start,
  output layer_desc_t                   gen_desc,
  input  logic                          gen_done
);

  localparam int unsigned LW = $clog2(MAX_LAYERS);

  typedef enum logic [2:0] {S_IDLE, S_NEXT, S_LOAD, S_RUN, S_WAIT} state_e;

  state_e           state;
  layer_desc_t      desc_q [MAX_LAYERS];
  logic [LW:0]      n_q;
  logic [DIM_W-1:0] row_cnt;
  layer_desc_t      cur;

  assign cur       = desc_q[cur_layer];
  assign gen_desc  = cur;
  assign cmu_we    = cfg_we;
  assign cmu_layer = cfg_layer;
  assign cmu_df    = cfg_desc.df;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (cfg_we) desc_q[cfg_layer] <= cfg_desc;
  end

  assign ld_re    = (state == S_LOAD);
  assign ld_src_w = (cur_df == DF_WS);
  assign ld_raddr = AW'(ld_src_w ? cur.w_base : cur.x_base) + AW'(row_cnt);
  assign gen_start = (state == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur_layer <= '0;
      n_q       <= '0;
      row_cnt   <= '0;
      done      <= 1'b0;
      rf_we     <= 1'b0;
      rf_row    <= '0;
      rf_src_w  <= 1'b0;
    end else begin
      done     <= 1'b0;
      rf_we    <= ld_re;
      rf_row   <= $clog2(N)'(row_cnt);
      rf_src_w <= ld_src_w;
      unique case (state)
        S_IDLE: if (start) begin
          cur_layer <= '0;
          n_q       <= num_layers;
          if (num_layers == 0) done <= 1'b1;
          else                 state <= S_NEXT;
        end
        S_NEXT: begin
          row_cnt <= '0;
          state   <= (cur_df == DF_OS) ? S_RUN : S_LOAD;
        end
        S_LOAD: begin
          row_cnt <= row_cnt + 1'b1;
          if (row_cnt + 1'b1 >= cur.k) state <= S_RUN;
        end
        S_RUN: state <= S_WAIT;
        S_WAIT: if (gen_done) begin
          if ((LW+1)'(cur_layer) + 1'b1 >= n_q) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            cur_layer <= cur_layer + 1'b1;
            state     <= S_NEXT;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Sizes the array can hold for each dataflow (the streamed one is free).
  a_fits: assert property (@(posedge clk) disable iff (!rst_n)
    cfg_we |-> (cfg_desc.df == DF_WS ? (cfg_desc.k <= DIM_W'(N) && cfg_desc.c <= DIM_W'(N)) :
                cfg_desc.df == DF_IS ? (cfg_desc.k <= DIM_W'(N) && cfg_desc.m <= DIM_W'(N)) :
                                       (cfg_desc.m <= DIM_W'(N) && cfg_desc.c <= DIM_W'(N))));
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n) cfg_we |-> !busy);

endmodule

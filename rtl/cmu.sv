// cmu: Configuration Management Unit.
//
// Holds the dataflow chosen offline for every layer of the network
// (MAX_LAYERS entries, programmed by the main controller through prog_we /
// prog_layer / prog_df). While layer cur_layer runs, it reports that
// layer's dataflow to the dataflow generator and main controller (cur_df)
// and drives the two multiplexer selects of every PE (pe_cfg): both 0 in IS
// and WS, both 1 in OS, except that the adder select drops to 0 while the
// dataflow generator signals the OS read-out (drain). Both outputs are
// combinational from the table, cur_layer and drain; a programmed entry is
// visible the cycle after the write.
//
// From the paper: the CMU is programmed by the main controller with the
// per-layer dataflow, reconfigures the PE multiplexers and informs the
// dataflow generator; the select values per dataflow. Own choices: table
// depth, encoding, the drain override, reset of the table to IS.
module cmu
  import flex_tpu_pkg::*;
#(
  parameter int unsigned MAX_LAYERS = 64
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          prog_we,
  input  logic [$clog2(MAX_LAYERS)-1:0] prog_layer,
  input  dataflow_e                     prog_df,
  input  logic [$clog2(MAX_LAYERS)-1:0] cur_layer,
  input  logic                          drain,
  output dataflow_e                     cur_df,
  output pe_cfg_t                       pe_cfg
);

  dataflow_e table_q [MAX_LAYERS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < MAX_LAYERS; l++) table_q[l] <= DF_IS;
    end else if (prog_we) begin
      table_q[prog_layer] <= prog_df;
    end
  end

  assign cur_df = table_q[cur_layer];
  assign pe_cfg = pe_cfg_for(cur_df, drain);

  a_valid_df: assert property (@(posedge clk) disable iff (!rst_n)
                               prog_we |-> prog_df inside {DF_IS, DF_OS, DF_WS});

endmodule

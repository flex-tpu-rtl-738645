// tb_cmu: self-checking test of the Configuration Management Unit.
//
// Programs random dataflows into random table entries, then walks
// cur_layer over the table with and without drain, checking cur_df against
// a model table and the PE selects against the rule: {0,0} for IS and WS,
// {1,1} for OS, {1,0} for OS during the read-out.
module tb_cmu;
  import flex_tpu_pkg::*;
  localparam int ML = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            prog_we = 0, drain = 0;
  logic [3:0]      prog_layer = '0, cur_layer = '0;
  dataflow_e       prog_df = DF_IS, cur_df;
  pe_cfg_t         pe_cfg;
  dataflow_e       model [ML];

  cmu #(.MAX_LAYERS(ML)) u_dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < ML; l++) model[l] = DF_IS;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      for (int it = 0; it < 24; it++) begin
        @(negedge clk);
        prog_we = 1; prog_layer = 4'($urandom);
        case ($urandom_range(0, 2)) 0: prog_df = DF_IS; 1: prog_df = DF_OS; default: prog_df = DF_WS; endcase
        model[prog_layer] = prog_df;
      end
      @(negedge clk); prog_we = 0;
      for (int l = 0; l < ML; l++) begin
        for (int d = 0; d < 2; d++) begin
          cur_layer = 4'(l); drain = d[0];
          #1;
          checks++;
          if (cur_df !== model[l]) begin failures++; $display("FAIL df layer %0d", l); end
          checks++;
          if (pe_cfg.sel_mult !== (model[l] == DF_OS) ||
              pe_cfg.sel_acc  !== (model[l] == DF_OS && !drain)) begin
            failures++; $display("FAIL selects layer %0d drain %0d: %b", l, d, pe_cfg);
          end
          @(negedge clk);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_main_controller: self-checking test of the layer sequencer (N = 4).
//
// Around the controller the testbench models the CMU (a table written
// through cmu_we) and the dataflow generator (gen_done a random number of
// cycles after gen_start). It programs four layers, starts them, and checks:
// every descriptor write is forwarded to the CMU; for IS/WS layers exactly
// K register-file loads from base + row of the right memory, each written
// to register-file row `row` one cycle later from the same source; none
// for OS; one gen_start per layer, in order, with that layer's descriptor;
// busy during the run and a single done pulse at the end.
module tb_main_controller;
  import flex_tpu_pkg::*;
  localparam int N = 4, ML = 8, AW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          cfg_we = 0, start = 0, busy, done;
  logic [2:0]    cfg_layer = '0;
  layer_desc_t   cfg_desc = '0;
  logic [3:0]    num_layers = '0;
  logic          cmu_we, ld_re, ld_src_w, rf_we, rf_src_w, gen_start, gen_done = 0;
  logic [2:0]    cmu_layer, cur_layer;
  dataflow_e     cmu_df, cur_df;
  logic [AW-1:0] ld_raddr;
  logic [1:0]    rf_row;
  layer_desc_t   gen_desc;

  main_controller #(.N(N), .MAX_LAYERS(ML), .AW(AW)) u_dut (.*);

  int checks = 0, failures = 0;
  dataflow_e   cmu_model [ML];
  layer_desc_t descs [4];
  int n_cmu_we = 0;

  always_ff @(posedge clk) if (cmu_we) begin cmu_model[cmu_layer] <= cmu_df; n_cmu_we++; end
  assign cur_df = cmu_model[cur_layer];

  task automatic expect_eq(string what, int got, int exp_v);
    checks++;
    if (got !== exp_v) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp_v); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // generator model
  initial begin
    forever begin
      @(posedge clk);
      if (gen_start) begin
        repeat ($urandom_range(3, 12)) @(posedge clk);
        @(negedge clk); gen_done = 1;
        @(negedge clk); gen_done = 0;
      end
    end
  end

  // monitor
  int layer_seen = 0, loads = 0, n_done = 0;
  logic prev_ld = 0; logic [1:0] prev_row; logic prev_src;
  always @(negedge clk) if (rst_n) begin
    expect_eq("rf_we follows ld_re", rf_we, prev_ld);
    if (rf_we) begin
      expect_eq("rf_row", rf_row, prev_row);
      expect_eq("rf_src_w", rf_src_w, prev_src);
    end
    if (ld_re) begin
      layer_desc_t d;
      d = descs[layer_seen];
      expect_eq("ld_src_w", ld_src_w, d.df == DF_WS);
      expect_eq("ld_raddr", ld_raddr, AW'((d.df == DF_WS ? d.w_base : d.x_base) + loads));
      checks++;
      if (d.df == DF_OS) begin failures++; $display("FAIL load in OS layer"); end
      prev_row = 2'(loads); prev_src = ld_src_w;
      loads++;
    end
    prev_ld = ld_re;
    if (gen_start) begin
      layer_desc_t d;
      d = descs[layer_seen];
      expect_eq($sformatf("loads before layer %0d", layer_seen), loads, d.df == DF_OS ? 0 : int'(d.k));
      checks++;
      if (gen_desc !== d) begin failures++; $display("FAIL gen_desc layer %0d", layer_seen); end
      expect_eq("cur_layer", cur_layer, layer_seen);
      layer_seen++;
      loads = 0;
    end
    if (done) n_done++;
  end

  initial begin
    descs[0] = '{df: DF_WS, m: 16'd5, k: 16'd3, c: 16'd4, x_base: 16'd1, w_base: 16'd10, o_base: 16'd0};
    descs[1] = '{df: DF_OS, m: 16'd4, k: 16'd9, c: 16'd2, x_base: 16'd20, w_base: 16'd30, o_base: 16'd0};
    descs[2] = '{df: DF_IS, m: 16'd2, k: 16'd4, c: 16'd6, x_base: 16'd40, w_base: 16'd50, o_base: 16'd0};
    descs[3] = '{df: DF_WS, m: 16'd1, k: 16'd2, c: 16'd1, x_base: 16'd60, w_base: 16'd70, o_base: 16'd0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < 4; l++) begin
      cfg_we = 1; cfg_layer = 3'(l); cfg_desc = descs[l];
      @(negedge clk);
      expect_eq("cmu forwarded", int'(cmu_model[l]), int'(descs[l].df));
    end
    cfg_we = 0;
    expect_eq("cmu writes", n_cmu_we, 4);
    start = 1; num_layers = 4'd4;
    @(negedge clk); start = 0;
    expect_eq("busy", busy, 1);
    while (n_done == 0) @(negedge clk);
    expect_eq("busy after done", busy, 0);
    expect_eq("layers run", layer_seen, 4);
    repeat (5) @(negedge clk);
    expect_eq("single done", n_done, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

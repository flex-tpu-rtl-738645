// tb_flex_tpu: end-to-end test of the Flex-TPU top level (N = 4).
//
// Programs a sequence of layers that uses all three dataflows, with sizes
// that leave some rows/columns of the array unused, fills the input and
// weight memories through the host ports in the layout each dataflow
// expects, runs the whole sequence with one start, then reads every result
// word back and compares it with a matrix product computed here. Unused
// lanes must read as zero. The run length is checked against the cycle
// budget of each layer (register-file load + L + 3N + 3 cycles). It also
// counts how often each mechanism occurred (IS/WS/OS layers, register-file
// loads, OS read-out cycles, dataflow switches between layers, masked
// lanes) and fails any that never happened.
module tb_flex_tpu;
  import flex_tpu_pkg::*;

  localparam int N = 4, DW = 8, AW_ = 32, DEPTH = 128, ML = 8;
  localparam int AW = $clog2(DEPTH), LW = $clog2(ML);
  localparam int NL = 6;          // layers in the test
  localparam int MAXD = 16;       // largest dimension used

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 x_we = 0, w_we = 0, o_re = 0, cfg_we = 0, start = 0;
  logic [AW-1:0]        x_waddr = '0, w_waddr = '0, o_raddr = '0;
  logic [N-1:0][DW-1:0] x_wdata = '0, w_wdata = '0;
  logic [N-1:0][AW_-1:0] o_rdata;
  logic [LW-1:0]        cfg_layer = '0;
  layer_desc_t          cfg_desc = '0;
  logic [LW:0]          num_layers = '0;
  logic                 busy, done;

  flex_tpu #(.N(N), .DATA_W(DW), .ACC_W(AW_), .MEM_DEPTH(DEPTH), .MAX_LAYERS(ML)) u_dut (
    .clk, .rst_n, .x_we, .x_waddr, .x_wdata, .w_we, .w_waddr, .w_wdata,
    .o_re, .o_raddr, .o_rdata, .cfg_we, .cfg_layer, .cfg_desc, .start, .num_layers, .busy, .done);

  int checks = 0, failures = 0;

  // layer table
  dataflow_e l_df [NL];
  int l_m [NL], l_k [NL], l_c [NL], l_xb [NL], l_wb [NL], l_ob [NL];
  int X [NL][MAXD][MAXD];
  int W [NL][MAXD][MAXD];

  function automatic int sx8(int v); return (v & 32'h80) != 0 ? (v | ~32'hFF) : (v & 32'hFF); endfunction

  task automatic define_layer(int l, dataflow_e df, int m, int k, int c, int xb, int wb, int ob);
    l_df[l] = df; l_m[l] = m; l_k[l] = k; l_c[l] = c; l_xb[l] = xb; l_wb[l] = wb; l_ob[l] = ob;
    for (int i = 0; i < MAXD; i++)
      for (int j = 0; j < MAXD; j++) begin
        X[l][i][j] = sx8($urandom);
        W[l][i][j] = sx8($urandom);
      end
  endtask

  task automatic write_x(int addr, logic [N-1:0][DW-1:0] d);
    @(negedge clk); x_we = 1; x_waddr = AW'(addr); x_wdata = d; @(negedge clk); x_we = 0;
  endtask
  task automatic write_w(int addr, logic [N-1:0][DW-1:0] d);
    @(negedge clk); w_we = 1; w_waddr = AW'(addr); w_wdata = d; @(negedge clk); w_we = 0;
  endtask

  // Memory layouts per dataflow (see dataflow_generator). Unused lanes are
  // filled with random junk to prove they are masked.
  task automatic load_layer(int l);
    logic [N-1:0][DW-1:0] wd;
    int m = l_m[l], k = l_k[l], c = l_c[l];
    case (l_df[l])
      DF_WS: begin
        for (int r = 0; r < m; r++) begin
          for (int i = 0; i < N; i++) wd[i] = (i < k) ? DW'(X[l][r][i]) : DW'($urandom);
          write_x(l_xb[l] + r, wd);
        end
        for (int r = 0; r < k; r++) begin
          for (int i = 0; i < N; i++) wd[i] = (i < c) ? DW'(W[l][r][i]) : DW'($urandom);
          write_w(l_wb[l] + r, wd);
        end
      end
      DF_IS: begin
        for (int r = 0; r < k; r++) begin
          for (int i = 0; i < N; i++) wd[i] = (i < m) ? DW'(X[l][i][r]) : DW'($urandom);
          write_x(l_xb[l] + r, wd);
        end
        for (int r = 0; r < c; r++) begin
          for (int i = 0; i < N; i++) wd[i] = (i < k) ? DW'(W[l][i][r]) : DW'($urandom);
          write_w(l_wb[l] + r, wd);
        end
      end
      default: begin // OS
        for (int r = 0; r < k; r++) begin
          for (int i = 0; i < N; i++) wd[i] = (i < m) ? DW'(X[l][i][r]) : DW'($urandom);
          write_x(l_xb[l] + r, wd);
        end
        for (int r = 0; r < k; r++) begin
          for (int i = 0; i < N; i++) wd[i] = (i < c) ? DW'(W[l][r][i]) : DW'($urandom);
          write_w(l_wb[l] + r, wd);
        end
      end
    endcase
    @(negedge clk);
    cfg_we = 1; cfg_layer = LW'(l);
    cfg_desc = '{df: l_df[l], m: DIM_W'(m), k: DIM_W'(k), c: DIM_W'(c),
                 x_base: BASE_W'(l_xb[l]), w_base: BASE_W'(l_wb[l]), o_base: BASE_W'(l_ob[l])};
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic int ref_o(int l, int r, int col);
    int s = 0;
    for (int q = 0; q < l_k[l]; q++) s += X[l][r][q] * W[l][q][col];
    return s;
  endfunction

  task automatic check_layer(int l);
    int words = (l_df[l] == DF_IS) ? l_c[l] : l_m[l];
    for (int a = 0; a < words; a++) begin
      @(negedge clk); o_re = 1; o_raddr = AW'(l_ob[l] + a);
      @(negedge clk); o_re = 0;
      for (int i = 0; i < N; i++) begin
        int exp_v, got;
        got = int'($signed(o_rdata[i]));
        if (l_df[l] == DF_IS) exp_v = (i < l_m[l]) ? ref_o(l, i, a) : 0;
        else                  exp_v = (i < l_c[l]) ? ref_o(l, a, i) : 0;
        checks++;
        if (got !== exp_v) begin
          failures++;
          $display("FAIL layer %0d (%s) word %0d lane %0d: got %0d exp %0d", l, l_df[l].name(), a, i, got, exp_v);
        end
      end
    end
  endtask

  // mechanism counters
  int n_is = 0, n_os = 0, n_ws = 0, n_rf_load = 0, n_drain = 0, n_switch = 0, n_masked = 0;
  dataflow_e prev_df;
  logic prev_busy = 0;
  always @(posedge clk) begin
    if (u_dut.gen_start) begin
      case (u_dut.cur_df)
        DF_IS: n_is++;
        DF_OS: n_os++;
        default: n_ws++;
      endcase
      if (prev_busy && u_dut.cur_df != prev_df) n_switch++;
      prev_df   <= u_dut.cur_df;
      prev_busy <= 1'b1;
    end
    if (u_dut.rf_we) n_rf_load++;
    if (u_dut.drain) n_drain++;
    if (u_dut.o_we && u_dut.o_mask != '1) n_masked++;
    if (done) prev_busy <= 1'b0;
  end

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1, budget;
    define_layer(0, DF_WS, 6, 4, 3,   0,   0,   0);
    define_layer(1, DF_OS, 3, 7, 4,  10,  10,  10);
    define_layer(2, DF_IS, 4, 2, 5,  20,  20,  20);
    define_layer(3, DF_OS, 4, 4, 4,  30,  30,  30);
    define_layer(4, DF_WS, 5, 3, 4,  40,  40,  40);
    define_layer(5, DF_IS, 2, 4, 6,  50,  50,  50);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) load_layer(l);

    // per layer: 1 decision cycle, K register-file loads (IS/WS), 1 start
    // cycle, L + 3N + 1 generator cycles; plus 1 for the registered done.
    budget = 1;
    for (int l = 0; l < NL; l++) begin
      int len;
      len = (l_df[l] == DF_WS) ? l_m[l] : (l_df[l] == DF_IS) ? l_c[l] : l_k[l];
      budget += len + 3 * N + 3 + ((l_df[l] == DF_OS) ? 0 : l_k[l]);
    end

    @(negedge clk); start = 1; num_layers = (LW+1)'(NL);
    t0 = $time;
    @(negedge clk); start = 0;
    checks++;
    if (!busy) begin failures++; $display("FAIL busy not set"); end
    while (!done) @(negedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != budget) begin
      failures++;
      $display("FAIL run took %0d cycles, expected %0d", (t1 - t0) / 10, budget);
    end
    for (int l = 0; l < NL; l++) check_layer(l);

    $display("mechanisms: IS=%0d OS=%0d WS=%0d rf_load=%0d drain=%0d switch=%0d masked_writes=%0d",
             n_is, n_os, n_ws, n_rf_load, n_drain, n_switch, n_masked);
    checks++; if (n_is == 0)      begin failures++; $display("FAIL no IS layer"); end
    checks++; if (n_os == 0)      begin failures++; $display("FAIL no OS layer"); end
    checks++; if (n_ws == 0)      begin failures++; $display("FAIL no WS layer"); end
    checks++; if (n_rf_load == 0) begin failures++; $display("FAIL no register-file load"); end
    checks++; if (n_drain == 0)   begin failures++; $display("FAIL no OS read-out"); end
    checks++; if (n_switch == 0)  begin failures++; $display("FAIL no dataflow switch"); end
    checks++; if (n_masked == 0)  begin failures++; $display("FAIL no masked lanes"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_layer_workloads: layer shapes from the evaluated networks, each run in
// all three dataflows on the full-size Flex-TPU (32 x 32 array).
//
// A layer is given as a matrix product O (M x C) = X (M x K) * W (K x C)
// with random INT8 data. For each dataflow the testbench does what a host
// would do:
//   OS: ceil(M/32) passes, one per 32-row block of M (block rows, C columns,
//       K streamed); the weights are stored once and shared;
//   WS: ceil(K/32) passes, one per K-slice (K-slice rows, C columns, M
//       streamed), and adds the slice results;
//   IS: ceil(M/32) x ceil(K/32) passes (K-slice rows, M-block columns, C
//       streamed), adds the slice results.
// Each result is compared with the product computed here, and each run's
// cycle count with its budget (1 + per pass L + 3N + 3, + slice K for IS
// and WS). The cycle counts are printed with the fastest dataflow, which is
// the per-layer choice the dataflow selection would make.
// Shapes (sizes from the standard network definitions):
//   MobileNet depthwise 3x3, one channel, 32 pixels:  M = 32, K = 9,    C = 1
//   MobileNet pointwise 1x1, 32 pixels, 64 -> 32 ch:  M = 32, K = 64,   C = 32
//   AlexNet FC6, one image, 1024 of the 9216 inputs,
//     32 of the 4096 outputs:                         M = 1,  K = 1024, C = 32
//   ResNet-18 conv1 7x7x3, 192 of the 112x112 pixels,
//     32 of the 64 filters:                           M = 192, K = 147, C = 32
//   VGG-13 conv1 3x3x3, 192 of the 224x224 pixels,
//     32 of the 64 filters:                           M = 192, K = 27,  C = 32
// The last shape (many pixels, short reduction) is where WS is fastest.
// Every pass carries a fixed cost of about 3N cycles (fill, drain and
// flush), so with these array and memory sizes OS wins the other shapes.
module tb_layer_workloads;
  import flex_tpu_pkg::*;

  localparam int N = 32, DW = 8, AW_ = 32, DEPTH = 1024, ML = 64;
  localparam int AW = $clog2(DEPTH), LW = $clog2(ML);
  localparam int MAXK = 1024, MAXM = 192;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                  x_we = 0, w_we = 0, o_re = 0, cfg_we = 0, start = 0;
  logic [AW-1:0]         x_waddr = '0, w_waddr = '0, o_raddr = '0;
  logic [N-1:0][DW-1:0]  x_wdata = '0, w_wdata = '0;
  logic [N-1:0][AW_-1:0] o_rdata;
  logic [LW-1:0]         cfg_layer = '0;
  layer_desc_t           cfg_desc = '0;
  logic [LW:0]           num_layers = '0;
  logic                  busy, done;

  flex_tpu u_dut (
    .clk, .rst_n, .x_we, .x_waddr, .x_wdata, .w_we, .w_waddr, .w_wdata,
    .o_re, .o_raddr, .o_rdata, .cfg_we, .cfg_layer, .cfg_desc, .start, .num_layers, .busy, .done);

  int checks = 0, failures = 0;
  int X [MAXM][MAXK];
  int W [MAXK][N];
  int Acc [MAXM][N];

  task automatic write_x(int addr, logic [N-1:0][DW-1:0] d);
    @(negedge clk); x_we = 1; x_waddr = AW'(addr); x_wdata = d; @(negedge clk); x_we = 0;
  endtask
  task automatic write_w(int addr, logic [N-1:0][DW-1:0] d);
    @(negedge clk); w_we = 1; w_waddr = AW'(addr); w_wdata = d; @(negedge clk); w_we = 0;
  endtask
  task automatic write_desc(int l, dataflow_e df, int m, int k, int c, int xb, int wb, int ob);
    @(negedge clk);
    cfg_we = 1; cfg_layer = LW'(l);
    cfg_desc = '{df: df, m: DIM_W'(m), k: DIM_W'(k), c: DIM_W'(c),
                 x_base: BASE_W'(xb), w_base: BASE_W'(wb), o_base: BASE_W'(ob)};
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic read_o(int addr, output logic [N-1:0][AW_-1:0] d);
    @(negedge clk); o_re = 1; o_raddr = AW'(addr); @(negedge clk); o_re = 0; d = o_rdata;
  endtask

  task automatic run(int layers, int budget, string name, output int cycles);
    int t0;
    @(negedge clk); start = 1; num_layers = (LW+1)'(layers);
    t0 = $time;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cycles = ($time - t0) / 10;
    checks++;
    if (cycles != budget) begin
      failures++;
      $display("FAIL %s took %0d cycles, budget %0d", name, cycles, budget);
    end
  endtask

  task automatic compare(string name, int m, int k, int c);
    for (int p = 0; p < m; p++)
      for (int f = 0; f < c; f++) begin
        int s;
        s = 0;
        for (int q = 0; q < k; q++) s += X[p][q] * W[q][f];
        checks++;
        if (Acc[p][f] !== s) begin
          failures++;
          if (failures < 10) $display("FAIL %s row %0d col %0d got %0d exp %0d", name, p, f, Acc[p][f], s);
        end
      end
  endtask

  task automatic layer(string name, int m, int k, int c);
    logic [N-1:0][DW-1:0]  wd;
    logic [N-1:0][AW_-1:0] rd;
    int ns, nb, budget, cyc_os, cyc_ws, cyc_is;
    ns = (k + N - 1) / N;
    nb = (m + N - 1) / N;
    for (int p = 0; p < MAXM; p++) for (int q = 0; q < MAXK; q++) X[p][q] = (p < m && q < k) ? int'($signed(8'($urandom))) : 0;
    for (int q = 0; q < MAXK; q++) for (int f = 0; f < N; f++) W[q][f] = (q < k && f < c) ? int'($signed(8'($urandom))) : 0;

    // OS, one pass per 32-row block of M; weights shared by all blocks
    budget = 1;
    for (int q = 0; q < k; q++) begin
      for (int i = 0; i < N; i++) wd[i] = DW'(W[q][i]);
      write_w(q, wd);
    end
    for (int b = 0; b < nb; b++) begin
      int mb;
      mb = (m - b * N < N) ? m - b * N : N;
      for (int q = 0; q < k; q++) begin
        for (int i = 0; i < N; i++) wd[i] = (i < mb) ? DW'(X[b * N + i][q]) : '0;
        write_x(b * k + q, wd);
      end
      write_desc(b, DF_OS, mb, k, c, b * k, 0, b * N);
      budget += k + 3 * N + 3;
    end
    run(nb, budget, {name, " OS"}, cyc_os);
    for (int p = 0; p < m; p++) begin
      read_o(p, rd);
      for (int f = 0; f < c; f++) Acc[p][f] = int'($signed(rd[f]));
    end
    compare({name, " OS"}, m, k, c);

    // WS, one pass per K-slice
    budget = 1;
    for (int s = 0; s < ns; s++) begin
      int ks;
      ks = (k - s * N < N) ? k - s * N : N;
      for (int p = 0; p < m; p++) begin
        for (int i = 0; i < N; i++) wd[i] = DW'(X[p][s * N + i]);
        write_x(s * m + p, wd);
      end
      for (int r = 0; r < ks; r++) begin
        for (int i = 0; i < N; i++) wd[i] = DW'(W[s * N + r][i]);
        write_w(s * N + r, wd);
      end
      write_desc(s, DF_WS, m, ks, c, s * m, s * N, s * m);
      budget += m + 3 * N + 3 + ks;
    end
    run(ns, budget, {name, " WS"}, cyc_ws);
    for (int p = 0; p < m; p++) for (int f = 0; f < c; f++) Acc[p][f] = 0;
    for (int s = 0; s < ns; s++)
      for (int p = 0; p < m; p++) begin
        read_o(s * m + p, rd);
        for (int f = 0; f < c; f++) Acc[p][f] += int'($signed(rd[f]));
      end
    compare({name, " WS"}, m, k, c);

    // IS, one pass per (M-block, K-slice); transposed weights shared by the blocks
    budget = 1;
    for (int s = 0; s < ns; s++)
      for (int f = 0; f < c; f++) begin
        for (int i = 0; i < N; i++) wd[i] = DW'(W[s * N + i][f]);
        write_w(s * c + f, wd);
      end
    for (int b = 0; b < nb; b++) begin
      int mb;
      mb = (m - b * N < N) ? m - b * N : N;
      for (int s = 0; s < ns; s++) begin
        int ks, l;
        ks = (k - s * N < N) ? k - s * N : N;
        l = b * ns + s;
        for (int r = 0; r < ks; r++) begin
          for (int i = 0; i < N; i++) wd[i] = (i < mb) ? DW'(X[b * N + i][s * N + r]) : '0;
          write_x(l * N + r, wd);
        end
        write_desc(l, DF_IS, mb, ks, c, l * N, s * c, l * c);
        budget += c + 3 * N + 3 + ks;
      end
    end
    run(nb * ns, budget, {name, " IS"}, cyc_is);
    for (int p = 0; p < m; p++) for (int f = 0; f < c; f++) Acc[p][f] = 0;
    for (int b = 0; b < nb; b++)
      for (int s = 0; s < ns; s++)
        for (int f = 0; f < c; f++) begin
          read_o((b * ns + s) * c + f, rd);
          for (int i = 0; i < N; i++) if (b * N + i < m) Acc[b * N + i][f] += int'($signed(rd[i]));
        end
    compare({name, " IS"}, m, k, c);

    $display("%s (M=%0d K=%0d C=%0d): OS=%0d WS=%0d IS=%0d cycles, fastest %s", name, m, k, c,
             cyc_os, cyc_ws, cyc_is,
             (cyc_os <= cyc_ws && cyc_os <= cyc_is) ? "OS" : (cyc_ws <= cyc_is) ? "WS" : "IS");
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    layer("MobileNet depthwise 3x3", 32, 9, 1);
    layer("MobileNet pointwise 1x1", 32, 64, 32);
    layer("AlexNet FC6 tile", 1, 1024, 32);
    layer("ResNet-18 conv1 tile", 192, 147, 32);
    layer("VGG-13 conv1 tile", 192, 27, 32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_conv_workload: one tile of a ResNet-18 convolution on the full-size
// Flex-TPU (32 x 32 array), run once in each dataflow.
//
// The layer is the 3x3, 64-to-64-channel, stride-1, pad-1 convolution of
// ResNet-18's first residual stage (56 x 56 feature map). The tile computed
// is 32 output pixels (output rows 0..3, columns 0..7, so the top/left
// zero padding is exercised) by 32 filters. The testbench lowers it to a
// matrix product O = X * W with an im2col mapping:
//   X[p][k] = In[oy+ky-1][ox+kx-1][ch],  p = oy*8 + ox,  k = (ky*3+kx)*64 + ch
//   W[k][f] = Wt[f][ky][kx][ch],         K = 576
// and runs it three times, as the offline dataflow selection does:
//   OS: one layer with M = 32, K = 576, C = 32 (K is streamed);
//   WS: 18 layers, one per 32-wide slice of K (M = 32, K = 32, C = 32);
//   IS: 18 layers, one per 32-wide slice of K (M = 32, K = 32, C = 32);
// For WS and IS the testbench adds the 18 partial results, as a host would.
// Every result is compared with a direct convolution sum, and each run's
// cycle count with its budget (L + 3N + 3 per layer, + K for IS/WS). The
// cycle counts are printed so the dataflows can be compared.
module tb_conv_workload;
  import flex_tpu_pkg::*;

  localparam int N = 32, DW = 8, AW_ = 32, DEPTH = 1024, ML = 64;
  localparam int AW = $clog2(DEPTH), LW = $clog2(ML);
  localparam int CH = 64, KK = 9 * CH, M = 32, C = 32, SL = KK / N;   // 18 slices
  localparam int IH = 5, IW = 9;                                      // input rows 0..4, cols 0..8

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
  int In [IH][IW][CH];
  int Wt [C][3][3][CH];
  int X  [M][KK];
  int W  [KK][C];
  int Oref [M][C];
  int Acc  [M][C];

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

  task automatic compare(string name);
    for (int p = 0; p < M; p++)
      for (int f = 0; f < C; f++) begin
        checks++;
        if (Acc[p][f] !== Oref[p][f]) begin
          failures++;
          if (failures < 10) $display("FAIL %s pixel %0d filter %0d got %0d exp %0d", name, p, f, Acc[p][f], Oref[p][f]);
        end
      end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0][DW-1:0]  wd;
    logic [N-1:0][AW_-1:0] rd;
    int cyc_os, cyc_ws, cyc_is;

    // data and reference (direct convolution)
    for (int y = 0; y < IH; y++) for (int x = 0; x < IW; x++) for (int ch = 0; ch < CH; ch++)
      In[y][x][ch] = int'($signed(8'($urandom)));
    for (int f = 0; f < C; f++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++)
      for (int ch = 0; ch < CH; ch++) Wt[f][ky][kx][ch] = int'($signed(8'($urandom)));
    for (int p = 0; p < M; p++) begin
      int oy, ox;
      oy = p / 8; ox = p % 8;
      for (int f = 0; f < C; f++) begin
        int s;
        s = 0;
        for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
          int iy, ix;
          iy = oy + ky - 1; ix = ox + kx - 1;
          if (iy >= 0 && ix >= 0)
            for (int ch = 0; ch < CH; ch++) s += In[iy][ix][ch] * Wt[f][ky][kx][ch];
        end
        Oref[p][f] = s;
      end
    end
    // im2col lowering
    for (int p = 0; p < M; p++)
      for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) for (int ch = 0; ch < CH; ch++) begin
        int iy, ix;
        iy = p / 8 + ky - 1; ix = p % 8 + kx - 1;
        X[p][(ky * 3 + kx) * CH + ch] = (iy >= 0 && ix >= 0) ? In[iy][ix][ch] : 0;
      end
    for (int f = 0; f < C; f++)
      for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) for (int ch = 0; ch < CH; ch++)
        W[(ky * 3 + kx) * CH + ch][f] = Wt[f][ky][kx][ch];

    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- OS: one layer, K streamed ----------------
    for (int k = 0; k < KK; k++) begin
      for (int i = 0; i < N; i++) wd[i] = DW'(X[i][k]);
      write_x(k, wd);
      for (int i = 0; i < N; i++) wd[i] = DW'(W[k][i]);
      write_w(k, wd);
    end
    write_desc(0, DF_OS, M, KK, C, 0, 0, 0);
    run(1, 1 + KK + 3 * N + 3, "OS", cyc_os);
    for (int p = 0; p < M; p++) begin
      read_o(p, rd);
      for (int f = 0; f < C; f++) Acc[p][f] = int'($signed(rd[f]));
    end
    compare("OS");

    // ---------------- WS: 18 K-slices ----------------
    for (int s = 0; s < SL; s++) begin
      for (int p = 0; p < M; p++) begin
        for (int i = 0; i < N; i++) wd[i] = DW'(X[p][s * N + i]);
        write_x(s * M + p, wd);
      end
      for (int r = 0; r < N; r++) begin
        for (int i = 0; i < N; i++) wd[i] = DW'(W[s * N + r][i]);
        write_w(s * N + r, wd);
      end
      write_desc(s, DF_WS, M, N, C, s * M, s * N, s * M);
    end
    run(SL, 1 + SL * (M + 3 * N + 3 + N), "WS", cyc_ws);
    for (int p = 0; p < M; p++) for (int f = 0; f < C; f++) Acc[p][f] = 0;
    for (int s = 0; s < SL; s++)
      for (int p = 0; p < M; p++) begin
        read_o(s * M + p, rd);
        for (int f = 0; f < C; f++) Acc[p][f] += int'($signed(rd[f]));
      end
    compare("WS");

    // ---------------- IS: 18 K-slices ----------------
    for (int s = 0; s < SL; s++) begin
      for (int r = 0; r < N; r++) begin          // X transposed: word k = X[0..M-1][k]
        for (int i = 0; i < N; i++) wd[i] = DW'(X[i][s * N + r]);
        write_x(s * N + r, wd);
      end
      for (int f = 0; f < C; f++) begin          // W transposed: word f = W[k][f] over k
        for (int i = 0; i < N; i++) wd[i] = DW'(W[s * N + i][f]);
        write_w(s * C + f, wd);
      end
      write_desc(s, DF_IS, M, N, C, s * N, s * C, s * C);
    end
    run(SL, 1 + SL * (C + 3 * N + 3 + N), "IS", cyc_is);
    for (int p = 0; p < M; p++) for (int f = 0; f < C; f++) Acc[p][f] = 0;
    for (int s = 0; s < SL; s++)
      for (int f = 0; f < C; f++) begin
        read_o(s * C + f, rd);
        for (int p = 0; p < M; p++) Acc[p][f] += int'($signed(rd[p]));
      end
    compare("IS");

    $display("conv tile cycles: OS=%0d WS=%0d IS=%0d", cyc_os, cyc_ws, cyc_is);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

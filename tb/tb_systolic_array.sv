// tb_systolic_array: self-checking test of the 4 x 4 reconfigurable array.
//
// The testbench drives the array edges itself (no FIFOs), with the
// diagonal skew row i / column j = one cycle per index, and checks:
//   WS/IS ({0,0}): a random stationary matrix S, a stream x[e][0..N-1]
//     entering row i on cycle e+i; psum_out[j] at the start of cycle e+N+j
//     must be sum_k x[e][k] * S[k][j] (this also covers IS, which differs
//     only in what the host puts in S and the stream).
//   OS ({1,1}): X (N x K) on the rows and W (K x N) on the columns; after
//     the last product the selects go to {1,0} and row N-1-d of X*W must
//     appear on psum_out in read-out cycle d; afterwards the array must
//     read zero (cleared by the read-out).
// Expected values are computed here from the same random matrices.
module tb_systolic_array;
  import flex_tpu_pkg::*;
  localparam int N = 4, DW = 8, AW_ = 32, E = 10, K = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pe_cfg_t                       cfg = '0;
  logic [N-1:0][DW-1:0]          h_in = '0, v_in = '0;
  logic [N-1:0][N-1:0][DW-1:0]   stat = '0;
  logic [N-1:0][AW_-1:0]         psum_out;

  systolic_array #(.N(N), .DATA_W(DW), .ACC_W(AW_)) u_dut (.*);

  int checks = 0, failures = 0;
  int S [N][N];
  int x [E][N];
  int X [N][K];
  int W [K][N];

  function automatic int s8(); return int'($signed(8'($urandom))); endfunction

  task automatic expect_eq(string what, int got, int exp_v);
    checks++;
    if (got !== exp_v) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp_v); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) S[i][j] = s8();
    for (int e = 0; e < E; e++) for (int i = 0; i < N; i++) x[e][i] = s8();
    for (int i = 0; i < N; i++) for (int k = 0; k < K; k++) X[i][k] = s8();
    for (int k = 0; k < K; k++) for (int j = 0; j < N; j++) W[k][j] = s8();
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) stat[i][j] = DW'(S[i][j]);
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---------------- WS / IS ----------------
    cfg = '{sel_mult: 1'b0, sel_acc: 1'b0};
    for (int c = 0; c < E + 3 * N; c++) begin
      // check outputs (state at the start of cycle c)
      for (int j = 0; j < N; j++) begin
        int e, s;
        e = c - N - j;
        if (e >= 0 && e < E) begin
          s = 0;
          for (int k = 0; k < N; k++) s += x[e][k] * S[k][j];
          expect_eq($sformatf("WS e=%0d col=%0d", e, j), int'($signed(psum_out[j])), s);
        end
      end
      for (int i = 0; i < N; i++) h_in[i] = (c - i >= 0 && c - i < E) ? DW'(x[c-i][i]) : '0;
      @(negedge clk);
    end
    for (int j = 0; j < N; j++) expect_eq("WS flushed", int'($signed(psum_out[j])), 0);

    // ---------------- OS ----------------
    cfg = '{sel_mult: 1'b1, sel_acc: 1'b1};
    for (int c = 0; c < K + 3 * N; c++) begin
      if (c >= K + 2 * N) begin
        int d;
        d = c - (K + 2 * N);
        for (int j = 0; j < N; j++) begin
          int s;
          s = 0;
          for (int k = 0; k < K; k++) s += X[N-1-d][k] * W[k][j];
          expect_eq($sformatf("OS row %0d col %0d", N - 1 - d, j), int'($signed(psum_out[j])), s);
        end
        cfg = '{sel_mult: 1'b1, sel_acc: 1'b0};     // read-out
      end
      for (int i = 0; i < N; i++) h_in[i] = (c - i >= 0 && c - i < K) ? DW'(X[i][c-i]) : '0;
      for (int j = 0; j < N; j++) v_in[j] = (c - j >= 0 && c - j < K) ? DW'(W[c-j][j]) : '0;
      @(negedge clk);
    end
    // N more read-out cycles shift out whatever the PEs still hold: all zero.
    for (int c = 0; c < N; c++) begin
      for (int j = 0; j < N; j++) expect_eq("OS cleared", int'($signed(psum_out[j])), 0);
      @(negedge clk);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

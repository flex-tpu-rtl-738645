// tb_dataflow_generator: self-checking test of the address/strobe
// sequencer (N = 4).
//
// Starts one layer per dataflow and records every strobe cycle by cycle,
// relative to the cycle after start (t = 0). Checks against the schedule
// worked out from the layout rules:
//   reads of base+t at t = 0..L-1 from the right memories;
//   FIFO pushes at t = 1..L (top bank only in OS), lane masks;
//   IS/WS writes of o_base+j at t = 2N+1+j; OS read-out at t = L+2N..L+3N-1
//   writing row N-1-d to o_base+N-1-d only for rows < M;
//   done exactly at t = L+3N.
module tb_dataflow_generator;
  import flex_tpu_pkg::*;
  localparam int N = 4, AW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          start = 0;
  dataflow_e     df = DF_IS;
  layer_desc_t   desc = '0;
  logic          x_re, w_re, h_push, v_push, h_src_w, drain, o_we, done;
  logic [AW-1:0] x_raddr, w_raddr, o_waddr;
  logic [N-1:0]  h_mask, v_mask, o_mask;

  dataflow_generator #(.N(N), .AW(AW)) u_dut (.*);

  int checks = 0, failures = 0;

  task automatic expect_eq(string what, int got, int exp_v);
    checks++;
    if (got !== exp_v) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp_v); end
  endtask

  task automatic run(dataflow_e f, int m, int k, int c, int xb, int wb, int ob);
    int len, t, n_x, n_w, n_h, n_v, n_o, n_drain;
    len = (f == DF_WS) ? m : (f == DF_IS) ? c : k;
    @(negedge clk);
    df = f;
    desc = '{df: f, m: DIM_W'(m), k: DIM_W'(k), c: DIM_W'(c),
             x_base: BASE_W'(xb), w_base: BASE_W'(wb), o_base: BASE_W'(ob)};
    start = 1;
    @(negedge clk);
    start = 0;
    n_x = 0; n_w = 0; n_h = 0; n_v = 0; n_o = 0; n_drain = 0;
    for (t = 0; t <= len + 3 * N + 2; t++) begin
      // reads
      expect_eq($sformatf("%s x_re t=%0d", f.name(), t), x_re, (t < len) && f != DF_IS);
      expect_eq($sformatf("%s w_re t=%0d", f.name(), t), w_re, (t < len) && f != DF_WS);
      if (x_re) begin expect_eq("x_raddr", x_raddr, AW'(xb + t)); n_x++; end
      if (w_re) begin expect_eq("w_raddr", w_raddr, AW'(wb + t)); n_w++; end
      // pushes
      expect_eq($sformatf("%s h_push t=%0d", f.name(), t), h_push, (t >= 1 && t <= len));
      expect_eq($sformatf("%s v_push t=%0d", f.name(), t), v_push, (t >= 1 && t <= len) && f == DF_OS);
      n_h += h_push; n_v += v_push;
      // writes / read-out
      expect_eq($sformatf("%s drain t=%0d", f.name(), t), drain,
                f == DF_OS && t >= len + 2 * N && t < len + 3 * N);
      n_drain += drain;
      if (f == DF_OS) begin
        int row;
        row = N - 1 - (t - (len + 2 * N));
        expect_eq($sformatf("OS o_we t=%0d", t), o_we, drain && row < m);
        if (o_we) expect_eq("OS o_waddr", o_waddr, AW'(ob + row));
      end else begin
        expect_eq($sformatf("%s o_we t=%0d", f.name(), t), o_we, t >= 2 * N + 1 && t < 2 * N + 1 + len);
        if (o_we) expect_eq("o_waddr", o_waddr, AW'(ob + t - (2 * N + 1)));
      end
      n_o += o_we;
      expect_eq($sformatf("%s done t=%0d", f.name(), t), done, t == len + 3 * N);
      if (t == 0) begin
        expect_eq("h_src_w", h_src_w, f == DF_IS);
        expect_eq("h_mask", int'(h_mask), (1 << ((f == DF_OS) ? m : k)) - 1);
        expect_eq("v_mask", int'(v_mask), (f == DF_OS) ? (1 << c) - 1 : 0);
        expect_eq("o_mask", int'(o_mask), (1 << ((f == DF_IS) ? m : c)) - 1);
      end
      @(negedge clk);
    end
    expect_eq("pushes", n_h, len);
    expect_eq("writes", n_o, (f == DF_OS) ? m : len);
    if (f == DF_OS) expect_eq("read-out cycles", n_drain, N);
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(DF_WS, 7, 3, 4, 10, 20, 30);
    run(DF_IS, 2, 4, 9, 40, 50, 60);
    run(DF_OS, 3, 11, 2, 70, 80, 90);
    run(DF_OS, 4, 1, 4, 5, 6, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

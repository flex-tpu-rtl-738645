// tb_flex_pe: self-checking test of one processing element.
//
// Drives random operands and all four select combinations, and compares the
// three registered outputs after every clock edge with a model of the PE
// written here: acc' = (sel_acc ? acc : psum_in) + (sel_mult ? v_in : stat_in) * h_in,
// h' = h_in, v' = v_in. Also checks that an IS/WS-configured PE ignores its
// own accumulator and that an OS-configured PE ignores psum_in and stat_in.
module tb_flex_pe;
  import flex_tpu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pe_cfg_t cfg;
  logic signed [7:0]  stat_in, v_in, h_in, v_out, h_out;
  logic signed [31:0] psum_in, acc_out;

  flex_pe #(.DATA_W(8), .ACC_W(32)) u_dut (.*);

  int checks = 0, failures = 0;
  longint model_acc;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp_v);
    end
  endtask

  initial begin
    cfg = '0; stat_in = 0; v_in = 0; h_in = 0; psum_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    model_acc = 0;
    check("reset acc", acc_out, 0);
    for (int it = 0; it < 400; it++) begin
      logic signed [7:0] a;
      longint nxt;
      @(negedge clk);
      cfg.sel_mult = $urandom_range(0, 1);
      cfg.sel_acc  = $urandom_range(0, 1);
      if (it < 20) cfg = '{sel_mult: 1'b1, sel_acc: 1'b1};   // a run of OS accumulation
      stat_in = 8'($urandom); v_in = 8'($urandom); h_in = 8'($urandom);
      psum_in = 32'($urandom_range(0, 200000)) - 100000;
      a = cfg.sel_mult ? v_in : stat_in;
      nxt = (cfg.sel_acc ? model_acc : longint'(psum_in)) + longint'(a) * longint'(h_in);
      nxt = longint'(int'(nxt));
      @(posedge clk); #1;
      model_acc = nxt;
      check("acc", acc_out, model_acc);
      check("h pass", h_out, h_in);
      check("v pass", v_out, v_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

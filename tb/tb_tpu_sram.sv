// tb_tpu_sram: self-checking test of the on-chip memory.
//
// Writes random words to random addresses while reading random addresses,
// keeps a model copy, and checks that each read returns the model's word
// one cycle after re (old data when the same address is written in the
// same cycle) and that rdata holds while re is low.
module tb_tpu_sram;
  localparam int W = 64, D = 32;
  logic clk = 0;
  always #5 clk = ~clk;

  logic          we = 0, re = 0;
  logic [4:0]    waddr = '0, raddr = '0;
  logic [W-1:0]  wdata = '0, rdata;
  logic [W-1:0]  model [D];

  tpu_sram #(.WIDTH(W), .DEPTH(D)) u_dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] exp_v;
    logic         exp_valid;
    // fill every word so that no read returns uninitialised data
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 5'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    exp_valid = 0;
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      if (exp_valid) begin
        checks++;
        if (rdata !== exp_v) begin failures++; $display("FAIL read got %h exp %h", rdata, exp_v); end
      end
      we = $urandom_range(0, 1); waddr = 5'($urandom); wdata = {$urandom, $urandom};
      re = $urandom_range(0, 2) != 0; raddr = (it % 5 == 0) ? waddr : 5'($urandom);
      if (re) begin exp_v = model[raddr]; exp_valid = 1; end
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_operand_feeder: self-checking test of a DEMUX + FIFO bank.
//
// Pushes bursts of random words (with gaps and with random lane masks) and
// checks, cycle by cycle, that lane i outputs lane i of the word pushed
// i+1 cycles earlier (zero where the lane was masked or nothing was
// pushed). This is the skew the array needs; the expected stream is kept
// here as a history of pushed words.
module tb_operand_feeder;
  localparam int N = 6, DW = 8, CYC = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 push = 0;
  logic [N-1:0][DW-1:0] word = '0;
  logic [N-1:0]         lane_mask = '1;
  logic [N-1:0][DW-1:0] lane_out;

  operand_feeder #(.N(N), .DATA_W(DW)) u_dut (.*);

  int checks = 0, failures = 0;
  // expected lane data pushed at cycle c
  logic                 h_push [CYC];
  logic [N-1:0][DW-1:0] h_word [CYC];

  initial begin
    repeat (CYC + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < CYC; c++) begin
      // drive cycle c
      push = (c < CYC - 2 * N) && ((c % 37) < 30);
      for (int i = 0; i < N; i++) word[i] = DW'($urandom);
      if ((c % 50) == 0) lane_mask = N'($urandom);
      h_push[c] = push;
      for (int i = 0; i < N; i++) h_word[c][i] = lane_mask[i] ? word[i] : '0;
      #1;
      for (int i = 0; i < N; i++) begin
        logic [DW-1:0] e;
        e = (c - 1 - i >= 0 && h_push[c-1-i]) ? h_word[c-1-i][i] : '0;
        checks++;
        if (lane_out[i] !== e) begin
          failures++;
          $display("FAIL cycle %0d lane %0d got %0h exp %0h", c, i, lane_out[i], e);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_output_mux: self-checking test of the output MUX / de-skew stage.
//
// Feeds a random value per column per cycle. With os_mode = 0, column j of
// word_out must equal the value presented on column j N-1-j cycles earlier
// (so that a staggered word comes out aligned); with os_mode = 1 it must
// equal the current input. Lanes outside lane_mask must be zero.
module tb_output_mux;
  localparam int N = 5, AW_ = 32, CYC = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                    os_mode = 0;
  logic [N-1:0]            lane_mask = '1;
  logic [N-1:0][AW_-1:0]   psum_in = '0;
  logic [N-1:0][AW_-1:0]   word_out;

  output_mux #(.N(N), .ACC_W(AW_)) u_dut (.*);

  int checks = 0, failures = 0;
  logic [N-1:0][AW_-1:0] hist [CYC];

  initial begin
    repeat (CYC + 50) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < CYC; c++) begin
      for (int j = 0; j < N; j++) psum_in[j] = $urandom;
      hist[c] = psum_in;
      os_mode = (c >= CYC / 2) && c[3];
      if ((c % 16) == 0) lane_mask = N'($urandom) | N'(1);
      #1;
      if (c >= N) begin
        for (int j = 0; j < N; j++) begin
          logic [AW_-1:0] e;
          e = !lane_mask[j] ? '0 : os_mode ? psum_in[j] : hist[c - (N - 1 - j)][j];
          checks++;
          if (word_out[j] !== e) begin
            failures++;
            $display("FAIL cycle %0d lane %0d os=%0d got %0h exp %0h", c, j, os_mode, word_out[j], e);
          end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

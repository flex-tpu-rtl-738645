// tb_wi_regfile: self-checking test of the Weight/IFMap register file.
//
// Writes random rows in random order, keeps a copy, and after every write
// checks all N x N outputs against the copy (the write is visible the cycle
// after it). Also checks the reset value and that a cycle without we
// changes nothing.
module tb_wi_regfile;
  localparam int N = 8, DW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 we = 0;
  logic [2:0]           wrow = '0;
  logic [N-1:0][DW-1:0] wdata = '0;
  logic [N-1:0][N-1:0][DW-1:0] q;
  logic [DW-1:0] model [N][N];

  wi_regfile #(.N(N), .DATA_W(DW)) u_dut (.*);

  int checks = 0, failures = 0;

  task automatic compare();
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        checks++;
        if (q[i][j] !== model[i][j]) begin
          failures++;
          $display("FAIL q[%0d][%0d] = %0h exp %0h", i, j, q[i][j], model[i][j]);
        end
      end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) model[i][j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    compare();
    for (int it = 0; it < 40; it++) begin
      @(negedge clk);
      we = ($urandom_range(0, 3) != 0);
      wrow = 3'($urandom);
      for (int j = 0; j < N; j++) wdata[j] = DW'($urandom);
      if (we) for (int j = 0; j < N; j++) model[wrow][j] = wdata[j];
      @(negedge clk); we = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

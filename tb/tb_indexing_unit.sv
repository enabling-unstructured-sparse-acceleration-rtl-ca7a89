// tb_indexing_unit: checks that PE row r receives B block r / N of the
// broadcast row for each pattern N = 1, 2, 4, 8.
`timescale 1ns/1ps
module tb_indexing_unit;
  import tasd_pkg::*;
  localparam int ROWS = 16, M = 8;
  pattern_e pattern;
  logic signed [DATA_W-1:0] b_row [ROWS*M];
  logic signed [DATA_W-1:0] b_sel [ROWS][M];
  indexing_unit #(.ROWS(ROWS), .M(M)) dut (.*);
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  initial begin
    for (int t = 0; t < 40; t++) begin
      int n;
      pattern = pattern_e'(t % 4);
      n = 1 << (t % 4);
      for (int k = 0; k < ROWS*M; k++) b_row[k] = DATA_W'($urandom);
      #1;
      for (int r = 0; r < ROWS; r++)
        for (int j = 0; j < M; j++) begin
          checks++;
          if (b_sel[r][j] !== b_row[(r / n) * M + j]) begin
            failures++;
            if (failures < 10) $display("FAIL: N=%0d row %0d elem %0d", n, r, j);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

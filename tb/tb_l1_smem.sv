// tb_l1_smem: writes random rows, reads them back with one-cycle latency,
// checks that the read data holds while rd_en is low and that a write does
// not disturb other rows.
`timescale 1ns/1ps
module tb_l1_smem;
  import tasd_pkg::*;
  localparam int DEPTH = 64, COLS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic rd_en, wr_en;
  logic [5:0] rd_addr, wr_addr;
  logic signed [ACC_W-1:0] rd_data [COLS], wr_data [COLS];
  l1_smem #(.DEPTH(DEPTH), .COLS(COLS)) dut (.*);
  int checks = 0, failures = 0;
  logic [ACC_W-1:0] model [DEPTH][COLS];
  initial begin
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0;
    for (int c = 0; c < COLS; c++) wr_data[c] = 0;
    #1 rst_n = 0; repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 6'(a);
      for (int c = 0; c < COLS; c++) begin wr_data[c] = $urandom; model[a][c] = wr_data[c]; end
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      int a, w;
      a = $urandom_range(0, DEPTH - 1); w = $urandom_range(0, DEPTH - 1);
      @(negedge clk); rd_en = 1; rd_addr = 6'(a);
      wr_en = (t % 3 == 0); wr_addr = 6'(w);
      for (int c = 0; c < COLS; c++) wr_data[c] = $urandom;
      @(posedge clk); #1;
      if (wr_en) for (int c = 0; c < COLS; c++) model[w][c] = wr_data[c];
      rd_en = 0; wr_en = 0;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (rd_data[c] !== model[a][c] && !(t % 3 == 0 && w == a)) begin failures++; $display("FAIL: row %0d col %0d", a, c); end
      end
      rd_addr = ~rd_addr;
      @(posedge clk); #1;
      checks++;
      if (rd_data[0] !== model[a][0] && !(t % 3 == 0 && w == a)) begin failures++; $display("FAIL: hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

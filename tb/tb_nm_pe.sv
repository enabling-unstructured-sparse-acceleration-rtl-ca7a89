// tb_nm_pe: checks that one PE stores an A value and index, picks the B
// element at that index and adds a*b to the incoming partial sum.
`timescale 1ns/1ps
module tb_nm_pe;
  import tasd_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en;
  logic signed [DATA_W-1:0] wr_val;
  logic [IDX_W-1:0] wr_idx;
  logic signed [DATA_W-1:0] b_blk [BLK_M];
  logic signed [ACC_W-1:0] psum_in, psum_out;
  nm_pe dut (.*);
  int checks = 0, failures = 0;
  initial begin
    wr_en = 0; wr_val = 0; wr_idx = 0; psum_in = 0;
    for (int j = 0; j < BLK_M; j++) b_blk[j] = 0;
    #1 rst_n = 0; repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      int a, i;
      a = $urandom_range(0, 255) - 128; i = $urandom_range(0, 7);
      @(negedge clk); wr_en = 1; wr_val = DATA_W'(a); wr_idx = IDX_W'(i);
      @(negedge clk); wr_en = 0;
      for (int r = 0; r < 3; r++) begin
        int bv [BLK_M];
        int ps;
        for (int j = 0; j < BLK_M; j++) begin bv[j] = $urandom_range(0, 255) - 128; b_blk[j] = DATA_W'(bv[j]); end
        ps = $urandom_range(0, 2000000) - 1000000; psum_in = ps;
        #1;
        checks++;
        if (psum_out !== ACC_W'(ps + a * bv[i])) begin
          failures++; $display("FAIL: a=%0d i=%0d b=%0d ps=%0d got %0d", a, i, bv[i], ps, psum_out);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

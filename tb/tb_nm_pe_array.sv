// tb_nm_pe_array: for every pattern (1:8, 2:8, 4:8, dense), builds a random
// structured-sparse A with distinct positions per block, compresses it into
// the PE register files, streams random B rows and checks each output
// against the dense dot product C[c] = psum[c] + sum_k A[c][k] * B[k].
// Also checks the one-cycle latency and that adv = 0 freezes the output.
`timescale 1ns/1ps
module tb_nm_pe_array;
  import tasd_pkg::*;
  localparam int ROWS = 16, COLS = 16, M = 8, K = ROWS * M;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  pattern_e pattern;
  logic a_wr_en, adv, b_valid, out_valid;
  logic [3:0] a_wr_row;
  logic signed [DATA_W-1:0] a_wr_val [COLS];
  logic [IDX_W-1:0] a_wr_idx [COLS];
  logic signed [DATA_W-1:0] b_row [K];
  logic signed [ACC_W-1:0] psum_in [COLS], out [COLS];
  nm_pe_array #(.ROWS(ROWS), .COLS(COLS), .M(M)) dut (.*);

  int checks = 0, failures = 0;
  int adense [COLS][K];
  int cval [ROWS][COLS], cidx [ROWS][COLS];

  initial begin
    a_wr_en = 0; adv = 1; b_valid = 0; a_wr_row = 0; pattern = PAT_1_8;
    for (int c = 0; c < COLS; c++) begin a_wr_val[c] = 0; a_wr_idx[c] = 0; psum_in[c] = 0; end
    for (int k = 0; k < K; k++) b_row[k] = 0;
    #1 rst_n = 0; repeat (2) @(posedge clk); rst_n = 1;
    for (int p = 0; p < 4; p++) begin
      int n, kk;
      n = 1 << p; kk = ROWS * M / n;
      pattern = pattern_e'(p);
      // random N:8 A: per column, per block choose n distinct positions
      for (int c = 0; c < COLS; c++) begin
        for (int k = 0; k < K; k++) adense[c][k] = 0;
        for (int b = 0; b < kk / M; b++) begin
          bit used [M];
          for (int j = 0; j < M; j++) used[j] = 0;
          for (int s = 0; s < n; s++) begin
            int pos;
            do pos = $urandom_range(0, M - 1); while (used[pos]);
            used[pos] = 1;
            cval[b*n + s][c] = $urandom_range(0, 255) - 128;
            cidx[b*n + s][c] = pos;
            adense[c][b*M + pos] = cval[b*n + s][c];
          end
        end
      end
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        a_wr_en = 1; a_wr_row = 4'(r);
        for (int c = 0; c < COLS; c++) begin a_wr_val[c] = DATA_W'(cval[r][c]); a_wr_idx[c] = IDX_W'(cidx[r][c]); end
      end
      @(negedge clk); a_wr_en = 0;
      for (int t = 0; t < 20; t++) begin
        int bv [K];
        int exp [COLS];
        for (int k = 0; k < K; k++) begin bv[k] = (k < kk) ? $urandom_range(0, 255) - 128 : 0; b_row[k] = DATA_W'(bv[k]); end
        for (int c = 0; c < COLS; c++) begin
          exp[c] = $urandom_range(0, 100000) - 50000; psum_in[c] = exp[c];
          for (int k = 0; k < kk; k++) exp[c] += adense[c][k] * bv[k];
        end
        b_valid = 1;
        @(posedge clk); #1;
        b_valid = 0;
        checks++;
        if (!out_valid) begin failures++; $display("FAIL: out_valid missing"); end
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (out[c] !== ACC_W'(exp[c])) begin
            failures++; if (failures < 10) $display("FAIL: N=%0d col %0d got %0d exp %0d", n, c, out[c], exp[c]);
          end
        end
        // freeze: with adv low a new input must not change the output
        if (t == 5) begin
          adv = 0; b_valid = 1;
          for (int k = 0; k < K; k++) b_row[k] = 1;
          @(posedge clk); #1;
          checks++;
          if (out[0] !== ACC_W'(exp[0]) || !out_valid) begin failures++; $display("FAIL: adv=0 did not hold"); end
          adv = 1; b_valid = 0;
        end
        @(negedge clk);
      end
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

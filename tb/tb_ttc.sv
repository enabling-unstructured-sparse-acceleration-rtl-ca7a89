// tb_ttc: one TTC driven directly (the sequencer's role is played here).
// Loads a 2:8 A tile, runs two passes over 24 B rows (the second adds into
// the C kept in L1 and is the last pass), then checks C = 2 x A x B row by
// row and the decomposed 2:8 + 1:8 blocks of C. A second TTC with only 2
// TASD units runs the same stimulus and must stall yet give the same C.
`timescale 1ns/1ps
module tb_ttc;
  import tasd_pkg::*;
  localparam int ROWS = 16, COLS = 16, M = 8, K = ROWS * M, L1D = 32, NR = 24, N = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pattern_e pattern;
  tasd_cfg_t cfg;
  logic accumulate, last_pass, a_wr_en, issue, c_rd_en, d_rd_en;
  logic [3:0] a_wr_row;
  logic signed [DATA_W-1:0] a_wr_val [COLS];
  logic [IDX_W-1:0] a_wr_idx [COLS];
  logic [4:0] addr, c_rd_addr;
  logic [5:0] d_rd_addr;
  logic signed [DATA_W-1:0] b_row [K];
  logic stall [2], pool_busy [2];
  logic signed [ACC_W-1:0] c_rd_data [2][COLS];
  dblk_t d_rd_data [2];
  logic adv;
  assign adv = !(stall[0] || stall[1]);

  ttc #(.L1_DEPTH(L1D)) dut (.clk, .rst_n, .pattern, .cfg, .accumulate, .last_pass,
    .a_wr_en, .a_wr_row, .a_wr_val, .a_wr_idx, .adv, .issue, .addr, .b_row,
    .stall(stall[0]), .pool_busy(pool_busy[0]), .c_rd_en, .c_rd_addr, .c_rd_data(c_rd_data[0]),
    .d_rd_en, .d_rd_addr, .d_rd_data(d_rd_data[0]));
  ttc #(.L1_DEPTH(L1D), .NUM_UNITS(2)) dut2 (.clk, .rst_n, .pattern, .cfg, .accumulate, .last_pass,
    .a_wr_en, .a_wr_row, .a_wr_val, .a_wr_idx, .adv, .issue, .addr, .b_row,
    .stall(stall[1]), .pool_busy(pool_busy[1]), .c_rd_en, .c_rd_addr, .c_rd_data(c_rd_data[1]),
    .d_rd_en, .d_rd_addr, .d_rd_data(d_rd_data[1]));

  int checks = 0, failures = 0, stalls = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask
  always @(posedge clk) if (rst_n && !adv) stalls++;

  longint ad [COLS][K], bm [NR][K];
  // B row source with the one-cycle read latency of L2
  always @(posedge clk) if (issue && adv) for (int k = 0; k < K; k++) b_row[k] <= DATA_W'(bm[addr][k]);

  task automatic pass(bit acc, bit last);
    accumulate = acc; last_pass = last;
    for (int t = 0; t < NR; t++) begin
      @(negedge clk); issue = 1; addr = 5'(t);
      while (!adv) @(negedge clk);
    end
    @(negedge clk); issue = 0;
    repeat (4) @(negedge clk);
    while (pool_busy[0] || pool_busy[1] || !adv) @(negedge clk);
  endtask

  initial begin
    pattern = PAT_2_8; cfg.n1 = 2; cfg.n2 = 1; accumulate = 0; last_pass = 0;
    a_wr_en = 0; a_wr_row = 0; issue = 0; addr = 0; c_rd_en = 0; d_rd_en = 0; c_rd_addr = 0; d_rd_addr = 0;
    for (int c = 0; c < COLS; c++) begin a_wr_val[c] = 0; a_wr_idx[c] = 0; end
    for (int k = 0; k < K; k++) b_row[k] = 0;
    for (int t = 0; t < NR; t++) for (int k = 0; k < K; k++) bm[t][k] = longint'($urandom_range(0, 255)) - 128;
    #1 rst_n = 0; repeat (2) @(posedge clk); rst_n = 1;
    // A tile: 2:8 over K = 64, positions 2 distinct per block
    for (int c = 0; c < COLS; c++) for (int k = 0; k < K; k++) ad[c][k] = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); a_wr_en = 1; a_wr_row = 4'(r);
      for (int c = 0; c < COLS; c++) begin
        int p, v;
        p = (r % N == 0) ? (c % 4) : 4 + ((c + r) % 4);
        v = $urandom_range(0, 255) - 128;
        a_wr_val[c] = DATA_W'(v); a_wr_idx[c] = 3'(p);
        ad[c][(r / N) * M + p] = v;
      end
    end
    @(negedge clk); a_wr_en = 0;
    pass(0, 0);
    pass(1, 1);
    for (int t = 0; t < NR; t++) begin
      longint cr [COLS];
      for (int c = 0; c < COLS; c++) begin
        cr[c] = 0;
        for (int k = 0; k < K; k++) cr[c] += 2 * ad[c][k] * bm[t][k];
      end
      @(negedge clk); c_rd_en = 1; c_rd_addr = 5'(t);
      @(negedge clk); c_rd_en = 0;
      for (int c = 0; c < COLS; c++) begin
        chk(longint'(c_rd_data[0][c]) == cr[c], $sformatf("C row %0d col %0d", t, c));
        chk(longint'(c_rd_data[1][c]) == cr[c], $sformatf("C (2 units) row %0d col %0d", t, c));
      end
      for (int b = 0; b < 2; b++) begin
        longint v [M];
        int i1 [2], i2;
        for (int j = 0; j < M; j++) v[j] = cr[b*M + j];
        // reference 2:8 + 1:8 pick, first index on ties
        for (int q = 0; q < 3; q++) begin
          int best;
          longint bmg;
          best = -1; bmg = -1;
          for (int j = 0; j < M; j++) begin
            longint mg;
            mg = v[j] < 0 ? -v[j] : v[j];
            if ((q < 1 || j != i1[0]) && (q < 2 || j != i1[1]) && mg > bmg) begin bmg = mg; best = j; end
          end
          if (q < 2) i1[q] = best; else i2 = best;
        end
        for (int u = 0; u < 2; u++) begin
          @(negedge clk); d_rd_en = 1; d_rd_addr = 6'(t*2 + b);
          @(negedge clk); d_rd_en = 0;
          chk(d_rd_data[u].t1_idx[0] == 3'(i1[0]) && $signed(d_rd_data[u].t1_val[0]) == v[i1[0]] &&
              d_rd_data[u].t1_idx[1] == 3'(i1[1]) && $signed(d_rd_data[u].t1_val[1]) == v[i1[1]] &&
              d_rd_data[u].t2_idx[0] == 3'(i2) && $signed(d_rd_data[u].t2_val[0]) == v[i2],
              $sformatf("DBlk %0d of row %0d (ttc %0d)", b, t, u));
        end
      end
    end
    chk(stalls > 0, "2-unit TTC never stalled");
    $display("INFO: stall cycles %0d", stalls);
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

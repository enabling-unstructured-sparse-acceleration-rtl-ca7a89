// tb_tasd_hw_full: one complete operation of the accelerator with every
// parameter at its default (4 TTCs, 16x16 PEs, 16 TASD units per TTC, 64-row
// L1/L2). A tile per TTC decomposed into 4:8 + 1:8 (TTCs 2 and 3 share one
// tile by multicast), two passes over 64 broadcast B rows with C kept in L1,
// and the final C decomposed on the fly into 4:8 + 1:8 blocks. Checks every
// C element and every decomposed block, the no-stall property of 16 TASD
// units per TTC and the length of the non-final pass (rows + 5 cycles).
`timescale 1ns/1ps
module tb_tasd_hw_full;
  import tasd_pkg::*;
  localparam int NT = 4, ROWS = 16, COLS = 16, M = 8, K = ROWS * M;
  localparam int L1D = 64, NU = 16;
  localparam int NBLK = L1D * COLS / M;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic l2_wr_en, a_wr_en, start, accumulate, last_pass, busy, done, stall;
  logic c_rd_en, d_rd_en;
  logic [$clog2(L1D)-1:0] l2_wr_addr, c_rd_addr;
  logic [$clog2(NBLK)-1:0] d_rd_addr;
  logic signed [DATA_W-1:0] l2_wr_data [K];
  logic [NT-1:0] a_wr_ttc_mask;
  logic [3:0] a_wr_row;
  logic signed [DATA_W-1:0] a_wr_val [COLS];
  logic [IDX_W-1:0] a_wr_idx [COLS];
  pattern_e pattern;
  tasd_cfg_t cfg;
  logic [$clog2(L1D):0] rows;
  logic [1:0] c_rd_ttc, d_rd_ttc;
  logic signed [ACC_W-1:0] c_rd_data [COLS];
  dblk_t d_rd_data;

  tasd_hw dut (.*);


  int checks = 0, failures = 0;
  int n_accum_pass = 0, n_multicast = 0, n_decomp = 0, n_stall = 0, n_ops = 0;
  int n_pat [4] = '{0, 0, 0, 0};

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && stall) n_stall++;

  task automatic init_inputs();
    l2_wr_en = 0; a_wr_en = 0; start = 0; accumulate = 0; last_pass = 0;
    c_rd_en = 0; d_rd_en = 0; l2_wr_addr = '0; c_rd_addr = '0; d_rd_addr = '0;
    a_wr_ttc_mask = '0; a_wr_row = '0; pattern = PAT_1_8; cfg = '0; rows = '0;
    c_rd_ttc = '0; d_rd_ttc = '0;
    for (int k = 0; k < K; k++) l2_wr_data[k] = '0;
    for (int c = 0; c < COLS; c++) begin a_wr_val[c] = '0; a_wr_idx[c] = '0; end
  endtask

  // reference: pick n1 then n2 largest magnitudes (first on ties) of a block
  task automatic decomp(input longint v [M], input int n1, input int n2,
                        output longint t1v [M], output int t1i [M],
                        output longint t2v [M], output int t2i [M]);
    bit taken [M];
    for (int j = 0; j < M; j++) begin taken[j] = 0; t1v[j] = 0; t1i[j] = 0; t2v[j] = 0; t2i[j] = 0; end
    for (int q = 0; q < n1 + n2; q++) begin
      int best;
      longint bm;
      best = 0; bm = -1;
      for (int j = 0; j < M; j++) begin
        longint mg;
        mg = v[j] < 0 ? -v[j] : v[j];
        if (!taken[j] && mg > bm) begin bm = mg; best = j; end
      end
      taken[best] = 1;
      if (q < n1) begin t1v[q] = v[best]; t1i[q] = best; end
      else begin t2v[q-n1] = v[best]; t2i[q-n1] = best; end
    end
  endtask

  function automatic int log2n(int n);
    return n == 1 ? 0 : n == 2 ? 1 : n == 4 ? 2 : 3;
  endfunction

  // A terms per TTC: compressed (value, index) per PE row and column
  int aval [2][NT][ROWS][COLS], aidx [2][NT][ROWS][COLS];
  longint adense [NT][COLS][K];   // A1 + A2, what the hardware multiplies
  longint bmat [L1D][K];
  longint cref [NT][L1D][COLS];

  task automatic load_a(int term, int patn);
    // TTC 2 and 3 share a tile: one multicast write for both
    for (int i = 0; i < NT; i++) begin
      if (i == 3 && NT == 4) continue;
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        a_wr_en = 1; a_wr_row = 4'(r);
        a_wr_ttc_mask = (i == 2 && NT == 4) ? NT'(4'b1100) : NT'(1 << i);
        for (int c = 0; c < COLS; c++) begin
          a_wr_val[c] = DATA_W'(aval[term][i][r][c]);
          a_wr_idx[c] = IDX_W'(aidx[term][i][r][c]);
        end
      end
      if (i == 2 && NT == 4) n_multicast++;
    end
    @(negedge clk); a_wr_en = 0; a_wr_ttc_mask = '0;
  endtask

  task automatic run_pass(int patn, bit acc, bit last, int nrows, int on1, int on2);
    int cyc;
    @(negedge clk);
    pattern = pattern_e'(log2n(patn)); accumulate = acc; last_pass = last;
    cfg.n1 = 4'(on1); cfg.n2 = 4'(on2); rows = ($clog2(L1D)+1)'(nrows);
    start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    n_pat[log2n(patn)]++;
    if (acc) n_accum_pass++;
    // no stall: rows + 5 cycles (plus the decomposition tail on the last pass)
    if (NU == 16 && !last) chk(cyc == nrows + 5, $sformatf("pass took %0d cycles for %0d rows", cyc, nrows));
  endtask

  // one complete operation: C = (A1 + A2) x B, then decompose C into on1:8 + on2:8
  task automatic operation(int n1, int n2, int on1, int on2, int nrows, int dens);
    int kk;
    kk = ROWS * M / n1;   // reduction length covered by the term-1 tile
    // B
    for (int t = 0; t < L1D; t++) begin
      @(negedge clk);
      l2_wr_en = 1; l2_wr_addr = $clog2(L1D)'(t);
      for (int k = 0; k < K; k++) begin
        bmat[t][k] = longint'($urandom_range(0, 255)) - 128;
        l2_wr_data[k] = DATA_W'(bmat[t][k]);
      end
    end
    @(negedge clk); l2_wr_en = 0;
    // A: random unstructured sparse, decomposed into the TASD series n1:8 + n2:8
    for (int i = 0; i < NT; i++) begin
      for (int term = 0; term < 2; term++)
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) begin aval[term][i][r][c] = 0; aidx[term][i][r][c] = 0; end
      for (int c = 0; c < COLS; c++) begin
        for (int k = 0; k < K; k++) adense[i][c][k] = 0;
        for (int b = 0; b < kk / M; b++) begin
          longint v [M], t1v [M], t2v [M];
          int t1i [M], t2i [M];
          for (int j = 0; j < M; j++) begin
            if (i == 3 && NT == 4) v[j] = longint'(aval[0][2][0][0]); // unused: TTC 3 copies TTC 2
            v[j] = ($urandom_range(1, 100) <= dens) ? longint'($urandom_range(0, 255)) - 128 : 0;
          end
          decomp(v, n1, n2, t1v, t1i, t2v, t2i);
          for (int s = 0; s < n1; s++) begin
            aval[0][i][b*n1 + s][c] = int'(t1v[s]); aidx[0][i][b*n1 + s][c] = t1i[s];
            adense[i][c][b*M + t1i[s]] += t1v[s];
          end
          for (int s = 0; s < n2; s++) begin
            aval[1][i][b*n2 + s][c] = int'(t2v[s]); aidx[1][i][b*n2 + s][c] = t2i[s];
            adense[i][c][b*M + t2i[s]] += t2v[s];
          end
        end
      end
    end
    if (NT == 4) begin
      aval[0][3] = aval[0][2]; aidx[0][3] = aidx[0][2];
      aval[1][3] = aval[1][2]; aidx[1][3] = aidx[1][2];
      adense[3] = adense[2];
    end
    // reference C
    for (int i = 0; i < NT; i++)
      for (int t = 0; t < nrows; t++)
        for (int c = 0; c < COLS; c++) begin
          longint s;
          s = 0;
          for (int k = 0; k < K; k++) s += adense[i][c][k] * bmat[t][k];
          cref[i][t][c] = s;
        end
    // passes
    load_a(0, n1);
    run_pass(n1, 0, n2 == 0, nrows, on1, on2);
    if (n2 != 0) begin
      load_a(1, n2);
      run_pass(n2, 1, 1, nrows, on1, on2);
    end
    // read back C
    for (int i = 0; i < NT; i++)
      for (int t = 0; t < nrows; t++) begin
        @(negedge clk); c_rd_en = 1; c_rd_ttc = 2'(i); c_rd_addr = $clog2(L1D)'(t);
        @(negedge clk); c_rd_en = 0;
        for (int c = 0; c < COLS; c++)
          chk(longint'(c_rd_data[c]) == cref[i][t][c], $sformatf("C ttc %0d row %0d col %0d: %0d exp %0d", i, t, c, c_rd_data[c], cref[i][t][c]));
      end
    // read back decomposed blocks
    for (int i = 0; i < NT; i++)
      for (int b = 0; b < nrows * COLS / M; b++) begin
        longint v [M], t1v [M], t2v [M];
        int t1i [M], t2i [M];
        for (int j = 0; j < M; j++) v[j] = cref[i][b / (COLS/M)][(b % (COLS/M))*M + j];
        decomp(v, on1, on2, t1v, t1i, t2v, t2i);
        @(negedge clk); d_rd_en = 1; d_rd_ttc = 2'(i); d_rd_addr = $clog2(NBLK)'(b);
        @(negedge clk); d_rd_en = 0;
        for (int j = 0; j < M; j++) begin
          chk(longint'($signed(d_rd_data.t1_val[j])) == t1v[j] && (j >= on1 || int'(d_rd_data.t1_idx[j]) == t1i[j]),
              $sformatf("DBlk ttc %0d blk %0d term1 slot %0d", i, b, j));
          chk(longint'($signed(d_rd_data.t2_val[j])) == t2v[j] && (j >= on2 || int'(d_rd_data.t2_idx[j]) == t2i[j]),
              $sformatf("DBlk ttc %0d blk %0d term2 slot %0d", i, b, j));
        end
        n_decomp++;
      end
    n_ops++;
  endtask

  // expect_stall: 1 when the instance has too few TASD units to keep up
  task automatic finish_checks(bit expect_stall);
    $display("INFO: ops=%0d accumulate_passes=%0d multicast_loads=%0d decomposed_blocks=%0d stall_cycles=%0d patterns 1:8=%0d 2:8=%0d 4:8=%0d 8:8=%0d",
             n_ops, n_accum_pass, n_multicast, n_decomp, n_stall, n_pat[0], n_pat[1], n_pat[2], n_pat[3]);
    chk(n_accum_pass > 0, "no accumulating (C reuse) pass");
    chk(n_multicast > 0, "no multicast A load");
    chk(n_decomp > 0, "no decomposition");
    if (expect_stall) begin
      chk(n_stall > 0, "stall never happened");
      for (int p = 0; p < 4; p++) chk(n_pat[p] > 0, $sformatf("pattern %0d never run", p));
    end else
      chk(n_stall == 0, "stall with 16 TASD units per TTC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    init_inputs();
    #1 rst_n = 0; repeat (2) @(posedge clk); rst_n = 1;
    // one complete operation at full size: 4:8 + 1:8 A, output series 4:8 + 1:8
    operation(4, 1, 4, 1, L1D, 40);
    finish_checks(0);
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tasd_unit: self-checking test of one TASD unit.
// Checks the decomposition of directed blocks (including the 8-element rows
// of the worked TASD example: a 2:8 term over the residual [0 0 0 0 0 0 1 0])
// and of random signed blocks under every supported series, against a
// reference that scans for the first maximum magnitude. Also checks the
// latency: N1+N2 extraction cycles, result one cycle after the last pick,
// and back-to-back acceptance in the last extraction cycle.
`timescale 1ns/1ps
module tb_tasd_unit;
  import tasd_pkg::*;
  localparam int W = 32, M = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, ext_valid, ext_term, res_valid, res_ready;
  logic signed [W-1:0] in_blk [M];
  logic [7:0] in_tag, res_tag;
  tasd_cfg_t in_cfg;
  logic [2:0] ext_idx;
  logic signed [W-1:0] ext_val;
  logic signed [W-1:0] r1v [M], r2v [M];
  logic [2:0] r1i [M], r2i [M];

  tasd_unit #(.W(W), .M(M)) dut (.*, .res_t1_val(r1v), .res_t1_idx(r1i),
    .res_t2_val(r2v), .res_t2_idx(r2i));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference decomposition
  logic signed [W-1:0] e1v [M], e2v [M];
  logic [2:0] e1i [M], e2i [M];
  task automatic ref_decomp(input logic signed [W-1:0] b [M], input int n1, input int n2);
    bit taken [M];
    for (int j = 0; j < M; j++) begin taken[j] = 0; e1v[j] = 0; e2v[j] = 0; e1i[j] = 0; e2i[j] = 0; end
    for (int p = 0; p < n1 + n2; p++) begin
      int best = -1;
      longint bm = -1;
      for (int j = 0; j < M; j++) begin
        longint mg = (b[j] < 0) ? -longint'(b[j]) : longint'(b[j]);
        if (!taken[j] && mg > bm) begin bm = mg; best = j; end
      end
      taken[best] = 1;
      if (p < n1) begin e1v[p] = b[best]; e1i[p] = 3'(best); end
      else begin e2v[p-n1] = b[best]; e2i[p-n1] = 3'(best); end
    end
  endtask

  int ext_cnt;
  always @(posedge clk) if (ext_valid) ext_cnt++;

  task automatic run_block(input logic signed [W-1:0] b [M], input int n1, input int n2, input int tag);
    int cyc;
    in_blk = b; in_cfg.n1 = 4'(n1); in_cfg.n2 = 4'(n2); in_tag = 8'(tag);
    while (!in_ready) @(negedge clk);
    in_valid = 1;
    @(posedge clk); #1; in_valid = 0; ext_cnt = 0; cyc = 0;
    while (!res_valid) begin @(posedge clk); #1; cyc++; end
    ref_decomp(b, n1, n2);
    chk(cyc == n1 + n2, $sformatf("latency %0d expected %0d", cyc, n1 + n2));
    chk(ext_cnt == n1 + n2, $sformatf("ext cycles %0d", ext_cnt));
    chk(res_tag == 8'(tag), "tag");
    for (int j = 0; j < M; j++) begin
      chk(r1v[j] == e1v[j] && (j >= n1 || r1i[j] == e1i[j]), $sformatf("t1 slot %0d: %0d@%0d exp %0d@%0d", j, r1v[j], r1i[j], e1v[j], e1i[j]));
      chk(r2v[j] == e2v[j] && (j >= n2 || r2i[j] == e2i[j]), $sformatf("t2 slot %0d: %0d@%0d exp %0d@%0d", j, r2v[j], r2i[j], e2v[j], e2i[j]));
    end
    res_ready = 1; @(posedge clk); #1; res_ready = 0;
  endtask

  int cfgs [7][2] = '{'{1,0}, '{2,0}, '{2,1}, '{4,0}, '{4,1}, '{4,2}, '{8,0}};

  initial begin
    logic signed [W-1:0] b [M];
    in_valid = 0; res_ready = 0; in_tag = 0; in_cfg = '0;
    for (int j = 0; j < M; j++) in_blk[j] = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);

    // residual row of the worked example, 2:8 term: picks 1 at index 6, then 0 at index 0
    b = '{0, 0, 0, 0, 0, 0, 1, 0};
    run_block(b, 2, 0, 1);
    chk(r1v[0] == 1 && r1i[0] == 6 && r1v[1] == 0 && r1i[1] == 0, "worked example residual 2:8");
    // row 2 of the worked example under 4:8 + 1:8: [1 3 0 0 2 4 4 1]
    b = '{1, 3, 0, 0, 2, 4, 4, 1};
    run_block(b, 4, 1, 2);
    chk(r1v[0] == 4 && r1i[0] == 5 && r1v[1] == 4 && r1i[1] == 6 && r1v[2] == 3 && r1i[2] == 1 &&
        r1v[3] == 2 && r1i[3] == 4 && r2v[0] == 1 && r2i[0] == 0, "worked example row 2, 4:8+1:8");
    // negative values are ranked by magnitude
    b = '{-9, 3, 0, 7, -2, 0, 1, 8};
    run_block(b, 2, 1, 3);
    chk(r1v[0] == -9 && r1v[1] == 8 && r2v[0] == 7, "magnitude ranking");

    for (int t = 0; t < 200; t++) begin
      int c;
      c = t % 7;
      for (int j = 0; j < M; j++) begin
        int r;
        r = $urandom_range(0, 3);
        b[j] = (r == 0) ? 0 : ((r == 1) ? W'($urandom_range(0, 6)) - 3 : $signed($urandom));
      end
      run_block(b, cfgs[c][0], cfgs[c][1], t);
    end

    // back-to-back: a second block presented during the last pick is taken at once
    begin
      int t0, t1;
      b = '{5, 1, 2, 3, 4, 6, 7, 0};
      in_blk = b; in_cfg.n1 = 4; in_cfg.n2 = 1; in_valid = 1; res_ready = 1;
      @(posedge clk); #1; t0 = $time;
      // keep presenting; next acceptance should come exactly 5 cycles later
      while (1) begin @(negedge clk); if (in_ready) break; end
      @(posedge clk); #1; t1 = $time;
      chk((t1 - t0) == 50, $sformatf("back-to-back interval %0d ns", t1 - t0));
      in_valid = 0;
      repeat (8) @(posedge clk);
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

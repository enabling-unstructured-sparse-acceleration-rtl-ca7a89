// tb_tasd_unit_pool: streams 64 rows of 16 values, one per cycle, through
// the pool with the default 16 units and through a second pool with only 4
// units. Checks: every block is written exactly once at its block id with
// the reference decomposition; row t's two blocks go to units 2(t mod 8) and
// 2(t mod 8)+1; the 16-unit pool never stalls for any series of up to 8
// picks; the 4-unit pool does stall and still produces correct results.
`timescale 1ns/1ps
module tb_tasd_unit_pool;
  import tasd_pkg::*;
  localparam int COLS = 16, M = 8, ROWS_IN = 64, NB = ROWS_IN * 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tasd_cfg_t cfg;
  logic in_valid;
  logic [6:0] in_row;
  logic signed [ACC_W-1:0] in_data [COLS];
  logic in_ready [2];
  logic [1:0] wr_en [2];
  logic [6:0] wr_addr [2][2];
  dblk_t wr_data [2][2];
  logic busy [2];

  tasd_unit_pool #(.NUM_UNITS(16), .COLS(COLS), .M(M), .TAG_W(7)) dut (
    .clk, .rst_n, .cfg, .in_valid(in_valid && sel == 0), .in_ready(in_ready[0]), .in_row, .in_data,
    .wr_en(wr_en[0]), .wr_addr(wr_addr[0]), .wr_data(wr_data[0]), .busy(busy[0]));
  tasd_unit_pool #(.NUM_UNITS(4), .COLS(COLS), .M(M), .TAG_W(7)) dut4 (
    .clk, .rst_n, .cfg, .in_valid(in_valid && sel == 1), .in_ready(in_ready[1]), .in_row, .in_data,
    .wr_en(wr_en[1]), .wr_addr(wr_addr[1]), .wr_data(wr_data[1]), .busy(busy[1]));

  int checks = 0, failures = 0;
  int sel;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 3) $display("FAIL: %s sel=%0d n1=%0d n2=%0d t=%0t", what, sel, cfg.n1, cfg.n2, $time); end
  endtask

  // round-robin order of the 16-unit pool
  for (genvar u = 0; u < 16; u++) begin : g_chk
    always @(posedge clk)
      if (rst_n && dut.g_unit[u].u_tasd.in_valid && dut.g_unit[u].u_tasd.in_ready)
        chk(dut.g_unit[u].u_tasd.in_tag == 7'((int'(in_row) * 2) + u % 2) && (int'(in_row) % 8) == u / 2,
            $sformatf("unit %0d got row %0d", u, in_row));
  end

  logic signed [ACC_W-1:0] data [NB][M];
  int written [NB];
  always @(posedge clk)
    for (int p = 0; p < 2; p++)
      if (rst_n && wr_en[sel][p]) begin
        int b;
        logic signed [ACC_W-1:0] e1v [M], e2v [M];
        int e1i [M], e2i [M];
        bit taken [M];
        b = wr_addr[sel][p];
        written[b]++;
        for (int j = 0; j < M; j++) begin taken[j] = 0; e1v[j] = 0; e2v[j] = 0; e1i[j] = 0; e2i[j] = 0; end
        for (int q = 0; q < cfg.n1 + cfg.n2; q++) begin
          int best;
          longint bm;
          best = 0; bm = -1;
          for (int j = 0; j < M; j++) begin
            longint mg;
            mg = data[b][j] < 0 ? -longint'(data[b][j]) : longint'(data[b][j]);
            if (!taken[j] && mg > bm) begin bm = mg; best = j; end
          end
          taken[best] = 1;
          if (q < cfg.n1) begin e1v[q] = data[b][best]; e1i[q] = best; end
          else begin e2v[q-cfg.n1] = data[b][best]; e2i[q-cfg.n1] = best; end
        end
        for (int j = 0; j < M; j++) begin
          chk($signed(wr_data[sel][p].t1_val[j]) == e1v[j] && (j >= cfg.n1 || wr_data[sel][p].t1_idx[j] == 3'(e1i[j])), $sformatf("blk %0d t1 slot %0d", b, j));
          chk($signed(wr_data[sel][p].t2_val[j]) == e2v[j] && (j >= cfg.n2 || wr_data[sel][p].t2_idx[j] == 3'(e2i[j])), $sformatf("blk %0d t2 slot %0d", b, j));
        end
      end

  int stalls;
  int cfgs [7][2] = '{'{1,0}, '{2,0}, '{2,1}, '{4,0}, '{4,1}, '{4,2}, '{8,0}};

  initial begin
    in_valid = 0; in_row = 0; cfg = '0; sel = 0;
    for (int c = 0; c < COLS; c++) in_data[c] = 0;
    #1 rst_n = 0; repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 2; s++)
      for (int ci = 0; ci < 7; ci++) begin
        if (s == 1 && ci != 4 && ci != 6) continue;
        sel = s;
        cfg.n1 = 4'(cfgs[ci][0]); cfg.n2 = 4'(cfgs[ci][1]);
        for (int b = 0; b < NB; b++) written[b] = 0;
        stalls = 0;
        for (int t = 0; t < ROWS_IN; t++) begin
          @(negedge clk);
          in_row = 7'(t); in_valid = 1;
          for (int c = 0; c < COLS; c++) begin
            int r;
            r = $urandom_range(0, 2);
            in_data[c] = (r == 0) ? 0 : ((r == 1) ? ACC_W'($urandom_range(0, 9)) : $signed($urandom));
            data[t*2 + c/M][c%M] = in_data[c];
          end
          while (!in_ready[sel]) begin stalls++; @(negedge clk); end
          @(posedge clk);
        end
        @(negedge clk); in_valid = 0;
        while (busy[sel]) @(negedge clk);
        @(negedge clk);
        for (int b = 0; b < NB; b++) chk(written[b] == 1, $sformatf("block %0d written %0d times", b, written[b]));
        if (s == 0) chk(stalls == 0, $sformatf("16 units stalled %0d times for %0d:8+%0d:8", stalls, cfg.n1, cfg.n2));
        else        chk(stalls > 0, "4 units never stalled");
        $display("INFO: units=%0d cfg %0d:8+%0d:8 stalls=%0d", s ? 4 : 16, cfg.n1, cfg.n2, stalls);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

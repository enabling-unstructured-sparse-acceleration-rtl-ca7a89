// tb_tasd_seq: checks that a pass issues rows 0..rows-1 in order, one per
// advancing cycle, that stall freezes the issued row, that done waits for
// the pool to go idle, and the pass length (rows + 5 cycles from start to
// done without stalls).
`timescale 1ns/1ps
module tb_tasd_seq;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, stall, pool_busy, adv, issue, busy, done;
  logic [6:0] rows;
  logic [5:0] addr;
  tasd_seq #(.DEPTH(DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int next_row, cyc, stall_cnt;
  bit do_stall, hold_pool;
  always @(posedge clk) if (rst_n && busy) cyc++;
  // random stalls and pool activity, observed issues
  always @(negedge clk) begin
    stall = do_stall && ($urandom_range(0, 3) == 0);
    pool_busy = hold_pool && (cyc < int'(rows) + 12);
  end
  always @(posedge clk)
    if (rst_n && issue) begin
      chk(adv == !stall, "adv follows stall");
      if (adv) begin
        chk(int'(addr) == next_row, $sformatf("row %0d issued, expected %0d", addr, next_row));
        next_row++;
      end else stall_cnt++;
    end

  task automatic run(int r, bit st, bit hp);
    rows = 7'(r); do_stall = st; hold_pool = hp; next_row = 0; cyc = 0; stall_cnt = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    chk(next_row == r, $sformatf("issued %0d rows of %0d", next_row, r));
    if (!st && !hp) chk(cyc == r + 4, $sformatf("pass took %0d busy cycles, expected %0d", cyc, r + 4));
    if (hp) chk(cyc >= r + 12, "done before pool idle");
    if (st) chk(stall_cnt > 0, "no stall exercised");
    @(negedge clk);
    chk(!busy && !done, "idle after done");
  endtask

  initial begin
    start = 0; rows = 1; stall = 0; pool_busy = 0; do_stall = 0; hold_pool = 0;
    #1 rst_n = 0; repeat (2) @(posedge clk); rst_n = 1;
    run(1, 0, 0);
    run(64, 0, 0);
    run(17, 0, 0);
    run(40, 1, 0);
    run(8, 0, 1);
    run(33, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dblk_buffer: writes random decomposed blocks through both write ports
// (two different entries per cycle) and reads every entry back.
`timescale 1ns/1ps
module tb_dblk_buffer;
  import tasd_pkg::*;
  localparam int NBLK = 128, WP = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [WP-1:0] wr_en;
  logic [6:0] wr_addr [WP];
  dblk_t wr_data [WP];
  logic rd_en;
  logic [6:0] rd_addr;
  dblk_t rd_data;
  dblk_buffer #(.NBLK(NBLK), .WP(WP)) dut (.*);
  int checks = 0, failures = 0;
  dblk_t model [NBLK];
  function automatic dblk_t rnd();
    dblk_t d;
    for (int i = 0; i < $bits(dblk_t) / 32 + 1; i++) d = {d, 32'($urandom)};
    return d;
  endfunction
  initial begin
    wr_en = 0; rd_en = 0; rd_addr = 0;
    for (int p = 0; p < WP; p++) begin wr_addr[p] = 0; wr_data[p] = '0; end
    #1 rst_n = 0; repeat (2) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 3; r++)
      for (int a = 0; a < NBLK; a += 2) begin
        dblk_t old0;
        old0 = model[a];
        @(negedge clk);
        wr_en = 2'b11;
        wr_addr[0] = 7'(a); wr_addr[1] = 7'(a + 1);
        wr_data[0] = rnd(); wr_data[1] = rnd();
        model[a] = wr_data[0]; model[a + 1] = wr_data[1];
        if (r == 2 && a % 4 == 0) begin wr_en = 2'b10; model[a] = old0; end
      end
    // entries written with port 0 disabled in the last round keep their old value
    @(negedge clk); wr_en = 0;
    for (int a = 0; a < NBLK; a++) begin
      @(negedge clk); rd_en = 1; rd_addr = 7'(a);
      @(posedge clk); #1; rd_en = 0;
      checks++;
      if (rd_data !== model[a]) begin failures++; if (failures < 5) $display("FAIL: entry %0d", a); end
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

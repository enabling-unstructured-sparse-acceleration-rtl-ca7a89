// dblk_buffer: storage for decomposed blocks (the term tiles in SMEM).
//
// Entry b holds decomposed block b of the current output tile: its term-1
// entry (e.g. the 4:8 tile's DBlk-b) and its term-2 entry (e.g. the 1:8
// tile's DBlk-b), as value + in-block index slots (tasd_pkg::dblk_t).
// WP write ports (two: the TASD unit pool can finish two blocks per cycle),
// addressed by block id; one synchronous read port (data one cycle after
// rd_en). If two ports write the same entry, the higher port wins (the pool
// never does this). The slot format is this design's choice.
module dblk_buffer
  import tasd_pkg::*;
#(
  parameter int unsigned NBLK = 128,
  parameter int unsigned WP   = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [WP-1:0]             wr_en,
  input  logic [$clog2(NBLK)-1:0]   wr_addr [WP],
  input  dblk_t                     wr_data [WP],
  input  logic                      rd_en,
  input  logic [$clog2(NBLK)-1:0]   rd_addr,
  output dblk_t                     rd_data
);
  dblk_t mem [NBLK];

  always_ff @(posedge clk) begin
    for (int p = 0; p < WP; p++)
      if (wr_en[p]) mem[wr_addr[p]] <= wr_data[p];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_data <= '0;
    else if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule

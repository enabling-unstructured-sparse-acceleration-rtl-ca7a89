// l1_smem: per-TTC L1 scratchpad holding the stationary C tile.
//
// DEPTH rows of COLS accumulators (one row = one PE-array output vector).
// One synchronous read port (data one cycle after rd_en, held while rd_en is
// low) and one write port. C stays here across the passes of all TASD terms
// and reduction tiles that add into it. Written as a plain array; the size is
// this design's choice (64 rows).
module l1_smem
  import tasd_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned COLS  = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         rd_en,
  input  logic [$clog2(DEPTH)-1:0]     rd_addr,
  output logic signed [ACC_W-1:0]      rd_data [COLS],
  input  logic                         wr_en,
  input  logic [$clog2(DEPTH)-1:0]     wr_addr,
  input  logic signed [ACC_W-1:0]      wr_data [COLS]
);
  logic [COLS-1:0][ACC_W-1:0] mem [DEPTH];
  logic [COLS-1:0][ACC_W-1:0] q;

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int c = 0; c < COLS; c++) mem[wr_addr][c] <= wr_data[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     q <= '0;
    else if (rd_en) q <= mem[rd_addr];
  end

  always_comb
    for (int c = 0; c < COLS; c++) rd_data[c] = q[c];
endmodule

// indexing_unit: routes B blocks to the PE rows of the N:M array.
//
// A pass broadcasts one row of B, ROWS*M/N elements long for an N:M pattern.
// The stationary A tile is stored compressed: with N non-zeros per block,
// PE rows r = b*N .. b*N+N-1 hold the non-zeros of reduction block b. This
// unit hands each PE row the M-element B block b = r / N it multiplies with;
// the PE then picks its element with its stored in-block index.
// Purely combinational. The reference design only names this unit; this
// block-select function is the simplest one that serves that mapping.
module indexing_unit
  import tasd_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned M    = BLK_M
) (
  input  pattern_e                 pattern,
  input  logic signed [DATA_W-1:0] b_row [ROWS*M],
  output logic signed [DATA_W-1:0] b_sel [ROWS][M]
);
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      int unsigned blk;
      blk = r >> pattern;
      for (int j = 0; j < M; j++)
        b_sel[r][j] = b_row[blk*M + j];
    end
  end
endmodule

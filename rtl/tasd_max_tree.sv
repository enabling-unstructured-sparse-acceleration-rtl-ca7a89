// tasd_max_tree: comparator tree that finds the largest-magnitude element of
// an M-element block among the entries still marked valid.
//
// It is a balanced binary tree of M-1 two-input comparators (7 for M = 8),
// purely combinational. Each comparator forwards the valid candidate of larger
// magnitude; on equal magnitudes the left (lower-index) candidate wins, so a
// block whose remaining entries are all zero yields its lowest remaining index.
// Output: the winning index, its value and whether any valid entry was left.
// The tree shape follows the reference TASD unit; magnitude comparison and the
// tie rule are this design's reading of "extract the largest values".
module tasd_max_tree #(
  parameter int unsigned W = 32,
  parameter int unsigned M = 8
) (
  input  logic signed [W-1:0]         val [M],
  input  logic        [M-1:0]         valid,
  output logic        [$clog2(M)-1:0] max_idx,
  output logic signed [W-1:0]         max_val,
  output logic                        any_valid
);
  localparam int unsigned IW = $clog2(M);
  localparam int unsigned LV = $clog2(M);

  // Node arrays per level; level 0 holds the leaves.
  logic          nv  [LV+1][M];
  logic [W-1:0]  nm  [LV+1][M];
  logic [IW-1:0] ni  [LV+1][M];

  always_comb begin
    for (int l = 0; l <= LV; l++)
      for (int j = 0; j < M; j++) begin
        nv[l][j] = 1'b0;
        nm[l][j] = '0;
        ni[l][j] = '0;
      end
    for (int j = 0; j < M; j++) begin
      nv[0][j] = valid[j];
      nm[0][j] = val[j][W-1] ? W'(-val[j]) : W'(val[j]);
      ni[0][j] = IW'(j);
    end
    for (int l = 1; l <= LV; l++)
      for (int j = 0; j < (M >> l); j++) begin
        // right candidate wins only if it is valid and strictly larger, or
        // the left one is invalid
        if (nv[l-1][2*j+1] && (!nv[l-1][2*j] || (nm[l-1][2*j+1] > nm[l-1][2*j]))) begin
          nv[l][j] = 1'b1;
          nm[l][j] = nm[l-1][2*j+1];
          ni[l][j] = ni[l-1][2*j+1];
        end else begin
          nv[l][j] = nv[l-1][2*j];
          nm[l][j] = nm[l-1][2*j];
          ni[l][j] = ni[l-1][2*j];
        end
      end
  end

  assign any_valid = nv[LV][0];
  assign max_idx   = ni[LV][0];
  assign max_val   = val[ni[LV][0]];

endmodule

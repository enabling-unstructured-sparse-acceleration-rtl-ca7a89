// nm_pe_array: the N:M structured-sparse accelerator of one TTC.
//
// ROWS x COLS processing elements (16 x 16). PE column c computes output c:
// it holds one compressed row of the stationary A tile, ROWS non-zeros that
// cover ROWS/N reduction blocks of 8 (K = 128, 64, 32 or 16 for 1:8, 2:8,
// 4:8 and dense 8:8). Each cycle with b_valid, one B row of K elements is
// broadcast, the indexing unit gives every PE row its 8-element B block, every
// PE multiplies its A value by the B element at its stored index, and each
// column adds its ROWS products to the C partial sum psum_in[c]. The COLS
// results leave through a register one cycle later (out_valid), 16 outputs
// per cycle, i.e. two 8-element blocks for the TASD units.
// A tile load: a_wr_en writes PE row a_wr_row (values and indices for all
// columns) in one cycle. `adv` low freezes the output register (stall).
// PE count, 16 outputs per cycle and the pattern set follow the reference
// design; the compressed mapping, the combinational column reduction and the
// load port are this design's choices.
module nm_pe_array
  import tasd_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16,
  parameter int unsigned M    = BLK_M
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  pattern_e                 pattern,
  // A tile load, one PE row per cycle
  input  logic                     a_wr_en,
  input  logic [$clog2(ROWS)-1:0]  a_wr_row,
  input  logic signed [DATA_W-1:0] a_wr_val [COLS],
  input  logic [IDX_W-1:0]         a_wr_idx [COLS],
  // compute
  input  logic                     adv,
  input  logic                     b_valid,
  input  logic signed [DATA_W-1:0] b_row [ROWS*M],
  input  logic signed [ACC_W-1:0]  psum_in [COLS],
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  out [COLS]
);
  logic signed [DATA_W-1:0] b_sel [ROWS][M];
  logic signed [ACC_W-1:0]  col_sum [COLS];

  indexing_unit #(.ROWS(ROWS), .M(M)) u_idx (
    .pattern(pattern), .b_row(b_row), .b_sel(b_sel)
  );

  for (genvar c = 0; c < COLS; c++) begin : g_col
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      logic signed [ACC_W-1:0] ps_in, ps_out;
      if (r == 0) begin : g_top
        assign ps_in = psum_in[c];
      end else begin : g_mid
        assign ps_in = g_row[r-1].ps_out;
      end
      nm_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .wr_en    (a_wr_en && (a_wr_row == r[$clog2(ROWS)-1:0])),
        .wr_val   (a_wr_val[c]),
        .wr_idx   (a_wr_idx[c]),
        .b_blk    (b_sel[r]),
        .psum_in  (ps_in),
        .psum_out (ps_out)
      );
    end
    assign col_sum[c] = g_row[ROWS-1].ps_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int c = 0; c < COLS; c++) out[c] <= '0;
    end else if (adv) begin
      out_valid <= b_valid;
      if (b_valid)
        for (int c = 0; c < COLS; c++) out[c] <= col_sum[c];
    end
  end
endmodule

// l2_smem: shared L2 scratchpad holding B tiles for all TTCs.
//
// DEPTH rows of K elements (K = ROWS*M = 128, the longest B row a 1:8 pass
// uses). Rows are written whole from the off-chip side; one synchronous read
// port returns a row one cycle after rd_en (held while rd_en is low), and that
// row is broadcast to every TTC. B stays here while the decomposed A terms
// change. Written as a plain array; the size is this design's choice.
module l2_smem
  import tasd_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned K     = 128
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [$clog2(DEPTH)-1:0]   wr_addr,
  input  logic signed [DATA_W-1:0]   wr_data [K],
  input  logic                       rd_en,
  input  logic [$clog2(DEPTH)-1:0]   rd_addr,
  output logic signed [DATA_W-1:0]   rd_data [K]
);
  logic [K-1:0][DATA_W-1:0] mem [DEPTH];
  logic [K-1:0][DATA_W-1:0] q;

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int k = 0; k < K; k++) mem[wr_addr][k] <= wr_data[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     q <= '0;
    else if (rd_en) q <= mem[rd_addr];
  end

  always_comb
    for (int k = 0; k < K; k++) rd_data[k] = q[k];
endmodule

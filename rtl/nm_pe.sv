// nm_pe: one processing element of the N:M structured-sparse PE array.
//
// The PE keeps one element of the stationary A tile in its register file:
// the non-zero value and its 3-bit position inside its 8-element block. Each
// cycle it receives the 8-element B block its row works on (from the indexing
// unit), selects the B element at the stored position, multiplies it by the
// stored A value and adds the product to the partial sum coming from the PE
// above (psum_out = psum_in + a * b[idx]). The arithmetic path is
// combinational; only the register file is clocked.
// RF + MAC per PE follows the reference PE; the one-entry RF, the per-PE
// index mux and the widths are this design's choices.
module nm_pe
  import tasd_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  // register-file write (A tile load)
  input  logic                     wr_en,
  input  logic signed [DATA_W-1:0] wr_val,
  input  logic [IDX_W-1:0]         wr_idx,
  // B block of this PE row and partial sum chain
  input  logic signed [DATA_W-1:0] b_blk [BLK_M],
  input  logic signed [ACC_W-1:0]  psum_in,
  output logic signed [ACC_W-1:0]  psum_out
);
  logic signed [DATA_W-1:0] a_q;
  logic [IDX_W-1:0]         idx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q   <= '0;
      idx_q <= '0;
    end else if (wr_en) begin
      a_q   <= wr_val;
      idx_q <= wr_idx;
    end
  end

  logic signed [2*DATA_W-1:0] prod;
  assign prod     = a_q * b_blk[idx_q];
  assign psum_out = psum_in + ACC_W'(prod);

endmodule

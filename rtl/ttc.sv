// ttc: TASD Tensor Core - one structured-sparse tensor core plus TASD units.
//
// Contents: the L1 scratchpad holding the C tile, the 16x16 N:M PE array
// holding the stationary (decomposed) A tile, the pool of 16 TASD units, and
// the decomposed-tile buffer the units write into.
// Pipeline, driven by the shared sequencer (see tasd_seq):
//   stage 0  issue row t: L1 read of C row t (the L2 read happens outside)
//   stage 1  B row t arrives (broadcast), C row t arrives; PE array computes
//            C[t] + A x B[t]   (C taken as zero when accumulate = 0)
//   stage 2  result written back to L1 row t; if last_pass, the row is also
//            handed to the TASD units, which decompose its two 8-element
//            blocks into the configured series and store them by block id.
// stall is raised in stage 2 when the TASD units cannot take the row; the
// sequencer then holds every stage. With 16 units this never happens.
// Read-out ports: C rows through the L1 read port (only while no pass runs)
// and decomposed blocks from the buffer, both with one cycle latency.
// The block composition follows the reference TTC; pipeline, flags and
// read-out ports are this design's.
module ttc
  import tasd_pkg::*;
#(
  parameter int unsigned ROWS      = 16,
  parameter int unsigned COLS      = 16,
  parameter int unsigned M         = BLK_M,
  parameter int unsigned NUM_UNITS = 16,
  parameter int unsigned L1_DEPTH  = 64,
  localparam int unsigned AW       = $clog2(L1_DEPTH),
  localparam int unsigned BW       = $clog2(L1_DEPTH * COLS / M)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // pass configuration
  input  pattern_e                 pattern,
  input  tasd_cfg_t                cfg,
  input  logic                     accumulate,
  input  logic                     last_pass,
  // A tile load
  input  logic                     a_wr_en,
  input  logic [$clog2(ROWS)-1:0]  a_wr_row,
  input  logic signed [DATA_W-1:0] a_wr_val [COLS],
  input  logic [IDX_W-1:0]         a_wr_idx [COLS],
  // sequencer
  input  logic                     adv,
  input  logic                     issue,
  input  logic [AW-1:0]            addr,
  input  logic signed [DATA_W-1:0] b_row [ROWS*M],
  output logic                     stall,
  output logic                     pool_busy,
  // read-out
  input  logic                     c_rd_en,
  input  logic [AW-1:0]            c_rd_addr,
  output logic signed [ACC_W-1:0]  c_rd_data [COLS],
  input  logic                     d_rd_en,
  input  logic [BW-1:0]            d_rd_addr,
  output dblk_t                    d_rd_data
);
  localparam int unsigned BPC = COLS / M;

  // stage registers
  logic          v1_q, v2_q;
  logic [AW-1:0] a1_q, a2_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1_q <= 1'b0; a1_q <= '0; a2_q <= '0;
    end else if (adv) begin
      v1_q <= issue;
      a1_q <= addr;
      a2_q <= a1_q;
    end
  end

  // L1: read port shared between the pipeline and read-out
  logic                    l1_rd_en;
  logic [AW-1:0]           l1_rd_addr;
  logic signed [ACC_W-1:0] l1_q [COLS];
  logic signed [ACC_W-1:0] psum [COLS];
  logic signed [ACC_W-1:0] res [COLS];
  logic                    pool_ready, l1_wr_en;

  assign l1_rd_en   = (issue && adv) || c_rd_en;
  assign l1_rd_addr = issue ? addr : c_rd_addr;
  assign c_rd_data  = l1_q;

  l1_smem #(.DEPTH(L1_DEPTH), .COLS(COLS)) u_l1 (
    .clk, .rst_n,
    .rd_en   (l1_rd_en),
    .rd_addr (l1_rd_addr),
    .rd_data (l1_q),
    .wr_en   (l1_wr_en),
    .wr_addr (a2_q),
    .wr_data (res)
  );

  always_comb
    for (int c = 0; c < COLS; c++) psum[c] = accumulate ? l1_q[c] : '0;

  nm_pe_array #(.ROWS(ROWS), .COLS(COLS), .M(M)) u_array (
    .clk, .rst_n,
    .pattern   (pattern),
    .a_wr_en   (a_wr_en),
    .a_wr_row  (a_wr_row),
    .a_wr_val  (a_wr_val),
    .a_wr_idx  (a_wr_idx),
    .adv       (adv),
    .b_valid   (v1_q),
    .b_row     (b_row),
    .psum_in   (psum),
    .out_valid (v2_q),
    .out       (res)
  );

  assign stall    = v2_q && last_pass && !pool_ready;
  assign l1_wr_en = v2_q && adv;

  logic [BPC-1:0] dw_en;
  logic [BW-1:0]  dw_addr [BPC];
  dblk_t          dw_data [BPC];

  tasd_unit_pool #(.NUM_UNITS(NUM_UNITS), .COLS(COLS), .M(M), .TAG_W(BW)) u_pool (
    .clk, .rst_n,
    .cfg      (cfg),
    .in_valid (v2_q && last_pass && adv),
    .in_ready (pool_ready),
    .in_row   (BW'(a2_q)),
    .in_data  (res),
    .wr_en    (dw_en),
    .wr_addr  (dw_addr),
    .wr_data  (dw_data),
    .busy     (pool_busy)
  );

  dblk_buffer #(.NBLK(L1_DEPTH * BPC), .WP(BPC)) u_dbuf (
    .clk, .rst_n,
    .wr_en   (dw_en),
    .wr_addr (dw_addr),
    .wr_data (dw_data),
    .rd_en   (d_rd_en),
    .rd_addr (d_rd_addr),
    .rd_data (d_rd_data)
  );

  a_no_readout_during_pass: assert property (@(posedge clk) disable iff (!rst_n)
    !(issue && c_rd_en));
endmodule

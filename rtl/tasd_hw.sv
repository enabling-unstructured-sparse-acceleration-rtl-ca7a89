// tasd_hw: TASD accelerator top - four TASD Tensor Cores (TTCs) and a
// shared L2 scratchpad.
//
// The accelerator computes C = sum over terms of A_i x B, where A has been
// decomposed into structured-sparse terms A_i (N:8 with N in 1, 2, 4, 8), and
// decomposes the finished C blocks on the fly into a TASD series for the next
// layer. Each TTC holds one A tile in its PE register files and one C tile
// in its L1; B rows are read once from L2 and broadcast to all four TTCs
// (A multicast, B broadcast). A pass streams `rows` B rows; successive
// passes that only change the A term reuse B (in L2) and C (in L1). The pass
// flagged last_pass also sends its results through the TASD units into each
// TTC's decomposed-tile buffer.
// Off-chip memory is outside this module: its side appears as the L2 row
// write port, the A-tile load port (a one-hot or multicast TTC mask picks the
// receiving TTCs) and the two read-out ports (C rows and decomposed blocks,
// one cycle latency, TTC selected by c_rd_ttc / d_rd_ttc).
// Protocol: load L2 and the A tiles, pulse start with the pass settings held
// stable until done; done pulses one cycle when the pass, including every
// decomposition, is finished. stall is high in cycles the pipeline waits for
// TASD units (never with the default 16 units per TTC).
// Four TTCs, 16x16 PEs, M = 8 and 16 TASD units per TTC follow the reference
// configuration; memory depths, widths and the control protocol are this
// design's choices.
module tasd_hw
  import tasd_pkg::*;
#(
  parameter int unsigned NUM_TTC   = 4,
  parameter int unsigned ROWS      = 16,
  parameter int unsigned COLS      = 16,
  parameter int unsigned M         = BLK_M,
  parameter int unsigned NUM_UNITS = 16,
  parameter int unsigned L1_DEPTH  = 64,
  parameter int unsigned L2_DEPTH  = 64,
  localparam int unsigned K        = ROWS * M,
  localparam int unsigned AW       = $clog2(L1_DEPTH),
  localparam int unsigned BW       = $clog2(L1_DEPTH * COLS / M),
  localparam int unsigned TW       = NUM_TTC > 1 ? $clog2(NUM_TTC) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // L2 fill from off-chip memory
  input  logic                      l2_wr_en,
  input  logic [$clog2(L2_DEPTH)-1:0] l2_wr_addr,
  input  logic signed [DATA_W-1:0]  l2_wr_data [K],
  // A tile load (multicast by mask)
  input  logic                      a_wr_en,
  input  logic [NUM_TTC-1:0]        a_wr_ttc_mask,
  input  logic [$clog2(ROWS)-1:0]   a_wr_row,
  input  logic signed [DATA_W-1:0]  a_wr_val [COLS],
  input  logic [IDX_W-1:0]          a_wr_idx [COLS],
  // pass control
  input  logic                      start,
  input  pattern_e                  pattern,
  input  tasd_cfg_t                 cfg,
  input  logic [AW:0]               rows,
  input  logic                      accumulate,
  input  logic                      last_pass,
  output logic                      busy,
  output logic                      done,
  output logic                      stall,
  // read-out
  input  logic                      c_rd_en,
  input  logic [TW-1:0]             c_rd_ttc,
  input  logic [AW-1:0]             c_rd_addr,
  output logic signed [ACC_W-1:0]   c_rd_data [COLS],
  input  logic                      d_rd_en,
  input  logic [TW-1:0]             d_rd_ttc,
  input  logic [BW-1:0]             d_rd_addr,
  output dblk_t                     d_rd_data
);
  logic                     adv, issue, pool_busy_any;
  logic [AW-1:0]            addr;
  logic [NUM_TTC-1:0]       t_stall, t_pool_busy;
  logic signed [DATA_W-1:0] b_row [K];
  logic signed [ACC_W-1:0]  t_c [NUM_TTC][COLS];
  dblk_t                    t_d [NUM_TTC];
  logic [TW-1:0]            c_sel_q, d_sel_q;

  assign stall         = |t_stall;
  assign pool_busy_any = |t_pool_busy;

  tasd_seq #(.DEPTH(L1_DEPTH)) u_seq (
    .clk, .rst_n,
    .start     (start),
    .rows      (rows),
    .stall     (stall),
    .pool_busy (pool_busy_any),
    .adv       (adv),
    .issue     (issue),
    .addr      (addr),
    .busy      (busy),
    .done      (done)
  );

  l2_smem #(.DEPTH(L2_DEPTH), .K(K)) u_l2 (
    .clk, .rst_n,
    .wr_en   (l2_wr_en),
    .wr_addr (l2_wr_addr),
    .wr_data (l2_wr_data),
    .rd_en   (issue && adv),
    .rd_addr ($clog2(L2_DEPTH)'(addr)),
    .rd_data (b_row)
  );

  for (genvar i = 0; i < NUM_TTC; i++) begin : g_ttc
    ttc #(.ROWS(ROWS), .COLS(COLS), .M(M), .NUM_UNITS(NUM_UNITS), .L1_DEPTH(L1_DEPTH)) u_ttc (
      .clk, .rst_n,
      .pattern    (pattern),
      .cfg        (cfg),
      .accumulate (accumulate),
      .last_pass  (last_pass),
      .a_wr_en    (a_wr_en && a_wr_ttc_mask[i]),
      .a_wr_row   (a_wr_row),
      .a_wr_val   (a_wr_val),
      .a_wr_idx   (a_wr_idx),
      .adv        (adv),
      .issue      (issue),
      .addr       (addr),
      .b_row      (b_row),
      .stall      (t_stall[i]),
      .pool_busy  (t_pool_busy[i]),
      .c_rd_en    (c_rd_en && c_rd_ttc == TW'(i)),
      .c_rd_addr  (c_rd_addr),
      .c_rd_data  (t_c[i]),
      .d_rd_en    (d_rd_en && d_rd_ttc == TW'(i)),
      .d_rd_addr  (d_rd_addr),
      .d_rd_data  (t_d[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_sel_q <= '0;
      d_sel_q <= '0;
    end else begin
      if (c_rd_en) c_sel_q <= c_rd_ttc;
      if (d_rd_en) d_sel_q <= d_rd_ttc;
    end
  end

  assign c_rd_data = t_c[c_sel_q];
  assign d_rd_data = t_d[d_sel_q];

  a_no_load_during_pass: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(a_wr_en || l2_wr_en));
endmodule

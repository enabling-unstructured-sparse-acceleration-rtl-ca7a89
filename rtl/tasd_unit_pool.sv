// tasd_unit_pool: the TASD units of one TTC and their distribution network.
//
// Each accepted input is one PE-array output row of COLS values, i.e.
// BPC = COLS/M blocks (two for 16 columns). The blocks go to units in fixed
// round-robin order: row 0 to units 0,1, row 1 to units 2,3, ..., row 8 back
// to units 0,1. Block b of row t gets the tag t*BPC + b, its address in the
// decomposed-tile buffer. in_ready is high when all BPC target units can take
// a block; otherwise the PE array must stall. With NUM_UNITS = 16 and a
// series of at most M = 8 picks, each unit is free again exactly when its
// turn comes (16 = 2 x 8), so no stall happens.
// Finished blocks are collected by a priority scan (lowest unit first), up to
// WP = BPC per cycle, and presented as buffer writes (wr_en, wr_addr,
// wr_data). busy is high while any unit works or holds a result.
// The round-robin order follows the reference dataflow; the ready/stall
// handshake and the collector are this design's.
module tasd_unit_pool
  import tasd_pkg::*;
#(
  parameter int unsigned NUM_UNITS = 16,
  parameter int unsigned COLS      = 16,
  parameter int unsigned M         = BLK_M,
  parameter int unsigned TAG_W     = 7,
  localparam int unsigned BPC      = COLS / M
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  tasd_cfg_t                cfg,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [TAG_W-1:0]         in_row,
  input  logic signed [ACC_W-1:0]  in_data [COLS],
  output logic [BPC-1:0]           wr_en,
  output logic [TAG_W-1:0]         wr_addr [BPC],
  output dblk_t                    wr_data [BPC],
  output logic                     busy
);
  localparam int unsigned PW = (NUM_UNITS / BPC) > 1 ? $clog2(NUM_UNITS / BPC) : 1;

  logic [PW-1:0]           grp_q;     // group of BPC units next in turn
  logic [NUM_UNITS-1:0]    u_in_ready, u_in_valid, u_res_valid, u_res_ready, u_busy;
  logic [TAG_W-1:0]        u_res_tag [NUM_UNITS];
  logic signed [ACC_W-1:0] u_t1v [NUM_UNITS][M];
  logic signed [ACC_W-1:0] u_t2v [NUM_UNITS][M];
  logic [IDX_W-1:0]        u_t1i [NUM_UNITS][M];
  logic [IDX_W-1:0]        u_t2i [NUM_UNITS][M];

  // --- distribution ---
  always_comb begin
    in_ready = 1'b1;
    for (int b = 0; b < BPC; b++)
      if (!u_in_ready[int'(grp_q)*BPC + b]) in_ready = 1'b0;
  end

  always_comb begin
    u_in_valid = '0;
    for (int b = 0; b < BPC; b++)
      u_in_valid[int'(grp_q)*BPC + b] = in_valid && in_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) grp_q <= '0;
    else if (in_valid && in_ready)
      grp_q <= (int'(grp_q) == NUM_UNITS / BPC - 1) ? '0 : grp_q + 1'b1;
  end

  for (genvar u = 0; u < NUM_UNITS; u++) begin : g_unit
    logic signed [ACC_W-1:0] blk [M];
    logic                    ev, et;
    logic [IDX_W-1:0]        ei;
    logic signed [ACC_W-1:0] eval;
    always_comb
      for (int j = 0; j < M; j++) blk[j] = in_data[(u % BPC)*M + j];
    tasd_unit #(.W(ACC_W), .M(M), .TAG_W(TAG_W)) u_tasd (
      .clk, .rst_n,
      .in_valid   (u_in_valid[u]),
      .in_ready   (u_in_ready[u]),
      .in_blk     (blk),
      .in_tag     (TAG_W'(int'(in_row) * BPC + (u % BPC))),
      .in_cfg     (cfg),
      .ext_valid  (ev),
      .ext_term   (et),
      .ext_idx    (ei),
      .ext_val    (eval),
      .res_valid  (u_res_valid[u]),
      .res_ready  (u_res_ready[u]),
      .res_tag    (u_res_tag[u]),
      .res_t1_val (u_t1v[u]),
      .res_t1_idx (u_t1i[u]),
      .res_t2_val (u_t2v[u]),
      .res_t2_idx (u_t2i[u])
    );
    assign u_busy[u] = ev || u_res_valid[u];
  end

  assign busy = |u_busy;

  // --- collection: first BPC finished units, lowest index first ---
  always_comb begin
    int p;
    p = 0;
    u_res_ready = '0;
    wr_en = '0;
    for (int w = 0; w < BPC; w++) begin
      wr_addr[w] = '0;
      wr_data[w] = '0;
    end
    for (int u = 0; u < NUM_UNITS; u++) begin
      if (u_res_valid[u] && p < BPC) begin
        u_res_ready[u] = 1'b1;
        wr_en[p]       = 1'b1;
        wr_addr[p]     = u_res_tag[u];
        for (int j = 0; j < M; j++) begin
          wr_data[p].t1_val[j] = u_t1v[u][j];
          wr_data[p].t1_idx[j] = u_t1i[u][j];
          wr_data[p].t2_val[j] = u_t2v[u][j];
          wr_data[p].t2_idx[j] = u_t2i[u][j];
        end
        p++;
      end
    end
  end

endmodule

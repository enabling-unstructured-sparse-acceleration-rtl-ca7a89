// tasd_unit: dynamic structured decomposition of one M-element block.
//
// A block of M values (one group of PE-array outputs) is loaded in one cycle.
// In each following cycle the comparator tree (tasd_max_tree) picks the
// largest-magnitude element still present, the unit emits it as (i, a_i) and
// removes it from the block. The first N1 picks form the N1:M term, the next
// N2 picks the N2:M term, so a block takes N1+N2 <= M extraction cycles
// (a 4:8 + 1:8 series takes 5). Elements never picked are the dropped
// residual. Picked zeros are kept as explicit zero entries.
//
// Timing (block presented in cycle T1):
//   T1            in_valid & in_ready, block and cfg registered
//   T2 .. T1+N1   ext_valid, ext_term = 0 (term-1 picks, one per cycle)
//   .. T1+N1+N2   ext_valid, ext_term = 1 (term-2 picks)
//   next cycle    res_valid with the assembled decomposed block
// in_ready is high when idle and also during the last extraction cycle, so a
// unit can take a new block every N1+N2 cycles; with M-cycle series and
// 2 blocks per cycle, 16 units never stall the array (16 = 2 x 8).
// The result is held in its own register until res_ready; a new block is not
// accepted while an unread result would be overwritten.
// The sequential one-per-cycle extraction, the comparator tree and the T1..T6
// timing follow the reference design; the handshakes, the result format
// (slots of value + index, unused slots zero) and the tie rule (lower index
// wins) are this design's.
module tasd_unit
  import tasd_pkg::*;
#(
  parameter int unsigned W     = ACC_W,
  parameter int unsigned M     = BLK_M,
  parameter int unsigned TAG_W = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // block input
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic signed [W-1:0]         in_blk [M],
  input  logic        [TAG_W-1:0]     in_tag,
  input  tasd_cfg_t                   in_cfg,
  // per-cycle extraction stream (i, a_i)
  output logic                        ext_valid,
  output logic                        ext_term,
  output logic [$clog2(M)-1:0]        ext_idx,
  output logic signed [W-1:0]         ext_val,
  // assembled decomposed block
  output logic                        res_valid,
  input  logic                        res_ready,
  output logic        [TAG_W-1:0]     res_tag,
  output logic signed [W-1:0]         res_t1_val [M],
  output logic        [$clog2(M)-1:0] res_t1_idx [M],
  output logic signed [W-1:0]         res_t2_val [M],
  output logic        [$clog2(M)-1:0] res_t2_idx [M]
);
  localparam int unsigned IW = $clog2(M);

  logic signed [W-1:0] blk [M];
  logic [M-1:0]        remain;
  logic [3:0]          n1_q, total_q, cnt_q;
  logic [TAG_W-1:0]    tag_q;
  logic                busy;
  logic signed [W-1:0] t1v [M], t2v [M];
  logic [IW-1:0]       t1i [M], t2i [M];

  logic [IW-1:0]       mx_idx;
  logic signed [W-1:0] mx_val;
  logic                mx_any;

  tasd_max_tree #(.W(W), .M(M)) u_tree (
    .val(blk), .valid(remain), .max_idx(mx_idx), .max_val(mx_val), .any_valid(mx_any)
  );

  logic last, res_free, load;
  assign last     = busy && (cnt_q == total_q - 4'd1);
  assign res_free = !res_valid || res_ready;
  assign in_ready = (!busy || last) && res_free;
  assign load     = in_valid && in_ready;

  assign ext_valid = busy;
  assign ext_term  = (cnt_q >= n1_q);
  assign ext_idx   = mx_idx;
  assign ext_val   = mx_val;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      remain    <= '0;
      cnt_q     <= '0;
      n1_q      <= '0;
      total_q   <= '0;
      tag_q     <= '0;
      res_valid <= 1'b0;
      res_tag   <= '0;
      for (int j = 0; j < M; j++) begin
        blk[j] <= '0;
        t1v[j] <= '0; t1i[j] <= '0; t2v[j] <= '0; t2i[j] <= '0;
        res_t1_val[j] <= '0; res_t1_idx[j] <= '0;
        res_t2_val[j] <= '0; res_t2_idx[j] <= '0;
      end
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;

      if (busy) begin
        remain[mx_idx] <= 1'b0;
        cnt_q          <= cnt_q + 4'd1;
        if (cnt_q < n1_q) begin
          t1v[cnt_q[IW-1:0]] <= mx_val;
          t1i[cnt_q[IW-1:0]] <= mx_idx;
        end else begin
          t2v[IW'(cnt_q - n1_q)] <= mx_val;
          t2i[IW'(cnt_q - n1_q)] <= mx_idx;
        end
        if (last) begin
          busy      <= 1'b0;
          res_valid <= 1'b1;
          res_tag   <= tag_q;
          for (int j = 0; j < M; j++) begin
            res_t1_val[j] <= t1v[j]; res_t1_idx[j] <= t1i[j];
            res_t2_val[j] <= t2v[j]; res_t2_idx[j] <= t2i[j];
          end
          // the final pick goes straight into the result
          if (cnt_q < n1_q) begin
            res_t1_val[cnt_q[IW-1:0]] <= mx_val;
            res_t1_idx[cnt_q[IW-1:0]] <= mx_idx;
          end else begin
            res_t2_val[IW'(cnt_q - n1_q)] <= mx_val;
            res_t2_idx[IW'(cnt_q - n1_q)] <= mx_idx;
          end
        end
      end

      if (load) begin
        busy    <= 1'b1;
        blk     <= in_blk;
        remain  <= '1;
        cnt_q   <= '0;
        n1_q    <= in_cfg.n1;
        total_q <= in_cfg.n1 + in_cfg.n2;
        tag_q   <= in_tag;
        for (int j = 0; j < M; j++) begin
          t1v[j] <= '0; t1i[j] <= '0; t2v[j] <= '0; t2i[j] <= '0;
        end
      end
    end
  end

  // A configuration must pick at least one and at most M elements.
  a_cfg_legal: assert property (@(posedge clk) disable iff (!rst_n)
    load |-> (in_cfg.n1 >= 4'd1 && (5'(in_cfg.n1) + 5'(in_cfg.n2)) <= 5'(M)));
  // While busy, the tree always finds an element (N1+N2 <= M).
  a_tree_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> mx_any);

endmodule

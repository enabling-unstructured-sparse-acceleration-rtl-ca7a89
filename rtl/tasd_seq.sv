// tasd_seq: sequencer of one GEMM pass on all TTCs.
//
// A pass streams rows t = 0 .. rows-1: in stage 0 it issues row t (B row t
// from L2, C row t from every L1), in stage 1 the PE arrays multiply and add,
// in stage 2 the result is written back to L1 row t and, on the last pass of
// a tile, handed to the TASD units. After the last row it waits for the
// two pipeline stages to drain and for every TASD unit pool to go idle, then
// pulses done. `adv` is the pipeline advance enable shared by all stages and
// TTCs: it drops for one cycle whenever any TTC reports stall (its TASD units
// cannot take a block), which freezes every stage, including SRAM outputs.
// Timing: start in cycle 0 -> first issue in cycle 1 -> ... -> done.
// The control is this design's; the method only fixes what stays where
// (B in L2, C in L1, A in the PE register files).
module tasd_seq #(
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [$clog2(DEPTH):0]     rows,       // 1 .. DEPTH
  input  logic                       stall,      // OR of the TTC stall requests
  input  logic                       pool_busy,  // OR of the TTC pool busy flags
  output logic                       adv,
  output logic                       issue,      // stage-0 valid
  output logic [$clog2(DEPTH)-1:0]   addr,       // stage-0 row
  output logic                       busy,
  output logic                       done
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state_q;
  logic [$clog2(DEPTH):0] t_q, rows_q;
  logic [1:0]             drain_q;

  assign adv   = !stall;
  assign issue = (state_q == S_RUN);
  assign addr  = t_q[$clog2(DEPTH)-1:0];
  assign busy  = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      t_q     <= '0;
      rows_q  <= '0;
      drain_q <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_RUN;
          t_q     <= '0;
          rows_q  <= rows;
        end
        S_RUN: if (adv) begin
          if (t_q == rows_q - 1'b1) begin
            state_q <= S_DRAIN;
            drain_q <= '0;
          end
          t_q <= t_q + 1'b1;
        end
        S_DRAIN: begin
          if (adv && drain_q != 2'd3) drain_q <= drain_q + 2'd1;
          if (drain_q == 2'd3 && !pool_busy) begin
            state_q <= S_IDLE;
            done    <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_rows_legal: assert property (@(posedge clk) disable iff (!rst_n)
    (start && state_q == S_IDLE) |-> (rows >= 1 && 32'(rows) <= DEPTH));
endmodule

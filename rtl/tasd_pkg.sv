// tasd_pkg: shared widths, types and helpers of the TASD accelerator.
//
// The accelerator multiplies a structured-sparse operand A (N:8 per 8-element
// block along the reduction dimension) by a dense operand B and decomposes each
// 8-element block of the result into a series of up to two structured terms
// (for instance 4:8 + 1:8) for use as the next layer's A.
//
// Number formats are not fixed by the method; this design uses 8-bit signed
// operands and 32-bit signed accumulators. The block size M = 8 and the
// 16x16 PE array follow the reference configuration.
package tasd_pkg;

  parameter int unsigned DATA_W = 8;   // A and B element width (design choice)
  parameter int unsigned ACC_W  = 32;  // accumulator / C element width (design choice)
  parameter int unsigned BLK_M  = 8;   // block size M of the N:M patterns
  parameter int unsigned IDX_W  = $clog2(BLK_M);

  // Pattern of the stationary A tile in the PE array, coded as log2(N):
  // 0 -> 1:8, 1 -> 2:8, 2 -> 4:8, 3 -> 8:8 (dense).
  typedef enum logic [1:0] {
    PAT_1_8 = 2'd0,
    PAT_2_8 = 2'd1,
    PAT_4_8 = 2'd2,
    PAT_8_8 = 2'd3
  } pattern_e;

  // TASD series configuration of a TASD unit: term 1 is N1:M, term 2 is N2:M.
  // N2 = 0 means a single-term series. N1 >= 1 and N1 + N2 <= M.
  typedef struct packed {
    logic [3:0] n1;
    logic [3:0] n2;
  } tasd_cfg_t;

  // One decomposed block as stored in the decomposed-tile buffer: the term-1
  // entry (slots 0..N1-1 used) and the term-2 entry (slots 0..N2-1 used),
  // each slot a value and its position in the original 8-element block.
  typedef struct packed {
    logic [BLK_M-1:0][ACC_W-1:0] t1_val;
    logic [BLK_M-1:0][IDX_W-1:0] t1_idx;
    logic [BLK_M-1:0][ACC_W-1:0] t2_val;
    logic [BLK_M-1:0][IDX_W-1:0] t2_idx;
  } dblk_t;

  // Number of non-zeros per block of a pattern code.
  function automatic int unsigned pat_n(pattern_e p);
    return 1 << p;
  endfunction

  // Magnitude of a signed value as an unsigned number of the same width.
  // The most negative value maps to 2**(W-1), which is exact.
  function automatic logic [ACC_W-1:0] mag32(logic signed [ACC_W-1:0] v);
    return v[ACC_W-1] ? ACC_W'(-v) : ACC_W'(v);
  endfunction

endpackage

// tram_pkg -- shared types and constants of the approximate array multiplier.
//
// An approximate multiplier (AxM) here is an unsigned B x B array multiplier
// in which chosen signals are replaced by the constant 0. The choice is a
// structure, fixed when the multiplier is built, and is carried as three
// candidate masks of type cand_mask_t:
//   ZERO_PP    bit [i][j] : partial product pp_ij = w_i & x_j      (column i+j)
//   ZERO_SUM   bit [r][k] : sum output of the adder cell of row r,
//                           position k                             (column r+k)
//   ZERO_CARRY bit [r][k] : carry output of that same cell         (column r+k)
// Row r (1..B-1) of the array adds the partial products w_r & x_k,
// k = 0..B-1, to the running sum; position k of that row sits in
// accumulation column r+k. Only cells in the lowest P columns may be removed;
// mask bits of higher columns are ignored by the multiplier.
//
// INIT_ZERO_SUM / INIT_ZERO_CARRY are the structure that the greedy
// column-wise mapping gives for B = 8, P = 8 when the per-column structure
// parameters are theta_0..theta_3 = 1 and theta_4..theta_7 = 0 (the starting
// point of the training search), with every input pair weighted equally.
// Nine compressor outputs are tied to 0:
//   sums of row 1 pos 0..2, row 2 pos 0..1, row 3 pos 0;
//   carries of row 1 pos 0..2.
// Mask layout: row r occupies bits [16*r +: 16], position k is bit k of it.
package tram_pkg;

  // Largest operand width the mask type can describe.
  localparam int unsigned MAX_B = 16;

  // [row][position] (compressor outputs) or [i][j] (partial products).
  typedef logic [MAX_B-1:0][MAX_B-1:0] cand_mask_t;

  localparam cand_mask_t NO_APPROX       = '0;
  localparam cand_mask_t INIT_ZERO_SUM   = cand_mask_t'(64'h0001_0003_0007_0000);
  localparam cand_mask_t INIT_ZERO_CARRY = cand_mask_t'(64'h0000_0000_0007_0000);

endpackage

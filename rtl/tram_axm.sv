// tram_axm -- approximate unsigned array multiplier (AxM) with a structure
// fixed by parameters.
//
// Function: y = w * x for B-bit unsigned w and x, except that selected
// signals of the multiplier are replaced by the constant 0, which removes
// the logic that drove them and makes the product approximate.
//
// Structure (a generalisation of the 4-bit array of the source paper, Fig. 1):
//   * B*B partial products pp_ij = w_i & x_j; pp_ij belongs to column i+j.
//   * Row 0 is the partial products pp_0j. Each row r = 1..B-1 is a
//     ripple-carry row of B cells that adds w_r & x to the running sum:
//       position 0        : half adder (running sum of column r, pp_r0)
//       position 1..B-2   : full adder (running sum, pp_rk, carry of k-1)
//       position B-1      : row 1: half adder (pp_1,B-1, carry of k-1)
//                           rows 2..B-1: full adder whose running-sum input
//                           is the last carry of the row above
//     The cell of row r, position k sits in column r+k; its carry goes to
//     position k+1 (column r+k+1), its sum to the row below.
//   * Product bits: y[0] = pp_00, y[r] = sum of row r position 0 (r < B),
//     y[B-1+k] = sum of row B-1 position k, y[2B-1] = last carry of row B-1.
//   For B = 4 this is the 4-bit array of the paper's Fig. 1 (column 2 holds
//   3 partial products, one full adder and one half adder).
//
// Approximation: ZERO_PP[i][j] ties pp_ij to 0; ZERO_SUM[r][k] and
// ZERO_CARRY[r][k] tie the sum / carry output of cell (r,k) to 0. Only
// signals in columns 0..P-1 can be approximated, P being the largest number
// of approximable columns; mask bits of higher columns are ignored. The
// defaults are the structure mapped from the training start point
// theta_0..3 = 1 (see tram_pkg). The paper's mapping step only uses the
// compressor outputs; the partial-product mask follows its Fig. 1, which
// marks partial products as candidates too.
//
// With the default structure the product bits y[1], y[2] and y[3] are the
// removed sums of the cells in columns 1..3, so they are constant 0; this is
// the intended effect of the approximation, not a wiring fault.
//
// Interface: w, x operands, y product, all unsigned. Timing: purely
// combinational (the paper's 8-bit designs are single-cycle, about 0.5 ns in
// a 7 nm library); registering the ports is left to the instantiating design.
module tram_axm
  import tram_pkg::*;
#(
  parameter int unsigned B          = 8,
  parameter int unsigned P          = 8,
  parameter cand_mask_t  ZERO_PP    = NO_APPROX,
  parameter cand_mask_t  ZERO_SUM   = INIT_ZERO_SUM,
  parameter cand_mask_t  ZERO_CARRY = INIT_ZERO_CARRY
) (
  input  logic [B-1:0]   w,
  input  logic [B-1:0]   x,
  output logic [2*B-1:0] y
);

  if (B < 2 || B > MAX_B) begin : g_bad_width
    $error("tram_axm: B must lie in 2..%0d", MAX_B);
  end
  if (P > 2 * B) begin : g_bad_p
    $error("tram_axm: P must not exceed 2*B");
  end

  // Partial products after approximation, [i][j].
  logic [B-1:0] pp [B];
  // Gated sum and carry outputs of the adder cells, [row][position].
  // Row 0 has no cells and is left out.
  logic [B-1:0] sum_g [1:B-1];
  logic [B-1:0] cy_g  [1:B-1];

  for (genvar i = 0; i < B; i++) begin : g_pp_row
    for (genvar j = 0; j < B; j++) begin : g_pp
      if (ZERO_PP[i][j] && (i + j < P)) begin : g_zero
        assign pp[i][j] = 1'b0;
      end else begin : g_and
        assign pp[i][j] = w[i] & x[j];
      end
    end
  end

  for (genvar r = 1; r < B; r++) begin : g_row
    for (genvar k = 0; k < B; k++) begin : g_cell
      logic s_raw, c_raw;

      if (k == 0) begin : g_ha_first
        // Running sum of column r is the partial product pp_0r in row 1,
        // the position-1 sum of the row above otherwise.
        if (r == 1) begin : g_top
          tram_ha u_ha (.a(pp[0][1]), .b(pp[1][0]), .s(s_raw), .c(c_raw));
        end else begin : g_mid
          tram_ha u_ha (.a(sum_g[r-1][1]), .b(pp[r][0]), .s(s_raw), .c(c_raw));
        end
      end else if (k == B - 1 && r == 1) begin : g_ha_last
        // Nothing from row 0 reaches column B: a half adder suffices.
        tram_ha u_ha (.a(pp[1][k]), .b(cy_g[1][k-1]), .s(s_raw), .c(c_raw));
      end else begin : g_fa
        logic run_sum;
        if (r == 1) begin : g_top
          assign run_sum = pp[0][k+1];
        end else if (k == B - 1) begin : g_last
          assign run_sum = cy_g[r-1][B-1];
        end else begin : g_mid
          assign run_sum = sum_g[r-1][k+1];
        end
        tram_fa u_fa (.a(run_sum), .b(pp[r][k]), .ci(cy_g[r][k-1]),
                      .s(s_raw), .co(c_raw));
      end

      // Constant-0 replacement of the cell's outputs (column r+k < P only).
      assign sum_g[r][k] = (ZERO_SUM[r][k]   && (r + k < P)) ? 1'b0 : s_raw;
      assign cy_g[r][k]  = (ZERO_CARRY[r][k] && (r + k < P)) ? 1'b0 : c_raw;
    end
  end

  // Product bits.
  assign y[0] = pp[0][0];
  for (genvar r = 1; r < B; r++) begin : g_y_low
    assign y[r] = sum_g[r][0];
  end
  for (genvar k = 1; k < B; k++) begin : g_y_high
    assign y[B-1+k] = sum_g[B-1][k];
  end
  assign y[2*B-1] = cy_g[B-1][B-1];

endmodule

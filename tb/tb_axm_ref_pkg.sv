// tb_axm_ref_pkg -- software reference models for the approximate multiplier
// testbenches.
//
//   col_sum     S_c, the number of partial products w_i & x_(c-i) that are 1.
//   ref_axm     bit-level evaluation of the array multiplier with
//               constant-0 replacements, written procedurally column by
//               column and row by row (independent of the RTL's generate
//               structure).
//   closed_form the training-time model of the approximate product:
//               Y = W*X - sum_{c<P} theta_c * S_c * 2^c.
//   greedy_map  the column-wise mapping from structure parameters theta to
//               a concrete structure: walk columns 0..P-1 from least
//               significant; in each column, for each row from the top, try
//               tying the sum and then the carry output of the cell to 0 and
//               keep the change only if the mean squared error against
//               closed_form over all input pairs strictly drops.
package tb_axm_ref_pkg;
  import tram_pkg::*;

  typedef real theta_t [2*MAX_B];

  function automatic longint col_sum(int B, int c, longint w, longint x);
    longint s = 0;
    for (int i = 0; i < B; i++)
      if (c - i >= 0 && c - i < B) s += ((w >> i) & 1) * ((x >> (c - i)) & 1);
    return s;
  endfunction

  function automatic real closed_form(int B, int P, theta_t theta, longint w, longint x);
    real y = real'(w * x);
    for (int c = 0; c < P; c++) y -= theta[c] * real'(col_sum(B, c, w, x)) * real'(longint'(1) << c);
    return y;
  endfunction

  function automatic longint ref_axm(int B, int P, cand_mask_t zpp, cand_mask_t zs,
                                     cand_mask_t zc, longint w, longint x);
    int run [2*MAX_B];     // running-sum bit per column, -1 when absent
    int nxt [2*MAX_B];
    int carry, tot, s, co, pp;
    longint y;
    for (int c = 0; c < 2 * MAX_B; c++) run[c] = -1;
    for (int j = 0; j < B; j++)
      run[j] = (zpp[0][j] && j < P) ? 0 : int'((w & (x >> j)) & 1);
    y = longint'(run[0]);
    for (int r = 1; r < B; r++) begin
      for (int c = 0; c < 2 * MAX_B; c++) nxt[c] = -1;
      carry = -1;
      for (int k = 0; k < B; k++) begin
        pp  = (zpp[r][k] && r + k < P) ? 0 : int'(((w >> r) & (x >> k)) & 1);
        tot = pp + (run[r+k] < 0 ? 0 : run[r+k]) + (carry < 0 ? 0 : carry);
        s   = tot % 2;
        co  = tot / 2;
        if (r + k < P && zs[r][k]) s = 0;
        if (r + k < P && zc[r][k]) co = 0;
        nxt[r+k] = s;
        carry    = co;
      end
      nxt[r+B] = carry;
      y |= longint'(nxt[r]) << r;
      run = nxt;
    end
    for (int c = B; c < 2 * B; c++) y |= longint'(run[c]) << c;
    return y;
  endfunction

  function automatic real mse_vs(int B, int P, cand_mask_t zs, cand_mask_t zc,
                                 const ref real yref []);
    real acc = 0.0, d;
    for (longint v = 0; v < (longint'(1) << (2 * B)); v++) begin
      d = real'(ref_axm(B, P, '0, zs, zc, v >> B, v & ((longint'(1) << B) - 1))) - yref[v];
      acc += d * d;
    end
    return acc / real'(longint'(1) << (2 * B));
  endfunction

  task automatic greedy_map(input int B, input int P, input theta_t theta,
                            output cand_mask_t zs, output cand_mask_t zc);
    real yref [];
    real cur, m;
    cand_mask_t ts, tc;
    yref = new[1 << (2 * B)];
    for (longint v = 0; v < (longint'(1) << (2 * B)); v++)
      yref[v] = closed_form(B, P, theta, v >> B, v & ((longint'(1) << B) - 1));
    zs = '0;
    zc = '0;
    cur = mse_vs(B, P, zs, zc, yref);
    for (int c = 0; c < P; c++)
      for (int r = 1; r < B; r++) begin
        if (c - r >= 0 && c - r < B) begin
          ts = zs; ts[r][c-r] = 1'b1;
          m = mse_vs(B, P, ts, zc, yref);
          if (m < cur) begin zs = ts; cur = m; end
          tc = zc; tc[r][c-r] = 1'b1;
          m = mse_vs(B, P, zs, tc, yref);
          if (m < cur) begin zc = tc; cur = m; end
        end
      end
  endtask

endpackage

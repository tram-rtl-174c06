// tb_tram_axm_full -- the approximate multiplier at its default size and
// structure (B = 8, P = 8), checked as one complete piece of work:
//
//  1. The structure mapping is rerun in software: starting from the accurate
//     multiplier, structure parameters theta_0..3 = 1, theta_4..7 = 0 (the
//     starting point of the training search) are turned into constant-0
//     replacements by the greedy column-wise search (tb_axm_ref_pkg). The
//     masks it finds must be the multiplier's default masks.
//  2. All 65536 input pairs are applied to the multiplier; every product must
//     equal the bit-level software model of the mapped structure.
//  3. The error metrics of the structure are reported (error rate, NMED,
//     MaxED under uniform inputs) and the mapped structure must be closer, in
//     mean squared error, to the closed-form target than the exact product is.
module tb_tram_axm_full;
  import tram_pkg::*;
  import tb_axm_ref_pkg::*;

  logic [7:0]  w, x;
  logic [15:0] y;
  int checks = 0, failures = 0;

  tram_axm dut (.w(w), .x(x), .y(y));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic theta_t th;
    automatic cand_mask_t zs, zc;
    automatic longint n_err = 0, max_ed = 0, ed;
    automatic real sum_ed = 0.0, mse_axm = 0.0, mse_exact = 0.0, yr, d;
    for (int c = 0; c < 2 * MAX_B; c++) th[c] = (c < 4) ? 1.0 : 0.0;

    greedy_map(8, 8, th, zs, zc);
    checks += 2;
    if (zs != INIT_ZERO_SUM)   begin failures++; $display("FAIL mapped sum mask differs");   end
    if (zc != INIT_ZERO_CARRY) begin failures++; $display("FAIL mapped carry mask differs"); end
    for (int r = 1; r < 8; r++)
      $display("row %0d: zero sum pos %b, zero carry pos %b", r, zs[r][7:0], zc[r][7:0]);

    for (int v = 0; v < 65536; v++) begin
      {w, x} = 16'(v);
      #1;
      checks++;
      if (longint'(y) != ref_axm(8, 8, '0, zs, zc, longint'(w), longint'(x))) begin
        failures++;
        if (failures < 20) $display("FAIL w=%0d x=%0d y=%0d", w, x, y);
      end
      ed = longint'(w) * longint'(x) - longint'(y);
      if (ed < 0) ed = -ed;
      if (ed != 0) n_err++;
      if (ed > max_ed) max_ed = ed;
      sum_ed += real'(ed);
      yr = closed_form(8, 8, th, longint'(w), longint'(x));
      d = real'(y) - yr;                          mse_axm   += d * d;
      d = real'(longint'(w) * longint'(x)) - yr;  mse_exact += d * d;
    end
    $display("ER %0.4f%%  NMED %0.5f%%  MaxED %0d", 100.0 * real'(n_err) / 65536.0,
             100.0 * sum_ed / 65536.0 / 65535.0, max_ed);
    $display("MSE to target: mapped %0.3f, exact %0.3f", mse_axm / 65536.0, mse_exact / 65536.0);
    checks++;
    if (!(mse_axm < mse_exact)) begin failures++; $display("FAIL mapping did not approach target"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

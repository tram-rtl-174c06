// tb_tram_axm -- end-to-end self-check of the approximate array multiplier in
// several structures, driven with every 8-bit input pair (65536 vectors).
//
// Instances and what each shows:
//   u_def   default structure (B=8, P=8, mapped start point): equals the
//           software bit-level model; errs on some inputs.
//   u_exact no replacements: y = w*x for every pair (the accurate multiplier).
//   u_all8  every candidate in columns 0..7 removed: y equals the closed form
//           W*X - sum_{c<8} S_c*2^c, i.e. theta_c = 1 for c < 8.
//   u_plim  every mask bit set but P = 0: the column limit makes it exact.
//   u_p4    all sum outputs masked, P = 4: only columns 0..3 are affected.
//   u_cy    carry outputs only (pseudo-random mask), P = 8.
//   u_pp    partial products only (pseudo-random mask), P = 6.
//   u_fig1  the 4-bit multiplier of the paper's Fig. 1 with every marked
//           candidate of columns 0..2 removed: y = W*X - sum_{c<3} S_c*2^c.
// Each approximation mechanism (pp, sum, carry removal, column limit) is
// counted; one that never changes or limits a result counts as a failure.
module tb_tram_axm;
  import tram_pkg::*;
  import tb_axm_ref_pkg::*;

  localparam cand_mask_t ALL    = '1;
  localparam cand_mask_t CY_RND = cand_mask_t'(128'h0013_0025_004a_0093_0124_0049_00b6_0000);
  localparam cand_mask_t PP_RND = cand_mask_t'(128'h0001_0402_0005_0108_0013_0006_000b_0015);
  // Fig. 1: pp00, pp01, pp10, pp02, pp11, pp20; HA(1,0), FA(1,1), HA(2,0) s and c.
  localparam cand_mask_t F1_PP  = cand_mask_t'(64'h0000_0001_0003_0007);
  localparam cand_mask_t F1_SC  = cand_mask_t'(64'h0000_0001_0003_0000);

  logic [7:0]  w, x;
  logic [15:0] y_def, y_exact, y_all8, y_plim, y_p4, y_cy, y_pp;
  logic [7:0]  y_fig1;
  int checks = 0, failures = 0;
  int n_def_err = 0, n_all8_err = 0, n_p4_err = 0, n_cy_err = 0, n_pp_err = 0,
      n_fig1_err = 0, n_plim_exact = 0;

  tram_axm u_def (.w(w), .x(x), .y(y_def));
  tram_axm #(.B(8), .P(8), .ZERO_PP(NO_APPROX), .ZERO_SUM(NO_APPROX), .ZERO_CARRY(NO_APPROX))
    u_exact (.w(w), .x(x), .y(y_exact));
  tram_axm #(.B(8), .P(8), .ZERO_PP(ALL), .ZERO_SUM(ALL), .ZERO_CARRY(ALL))
    u_all8 (.w(w), .x(x), .y(y_all8));
  tram_axm #(.B(8), .P(0), .ZERO_PP(ALL), .ZERO_SUM(ALL), .ZERO_CARRY(ALL))
    u_plim (.w(w), .x(x), .y(y_plim));
  tram_axm #(.B(8), .P(4), .ZERO_PP(NO_APPROX), .ZERO_SUM(ALL), .ZERO_CARRY(NO_APPROX))
    u_p4 (.w(w), .x(x), .y(y_p4));
  tram_axm #(.B(8), .P(8), .ZERO_PP(NO_APPROX), .ZERO_SUM(NO_APPROX), .ZERO_CARRY(CY_RND))
    u_cy (.w(w), .x(x), .y(y_cy));
  tram_axm #(.B(8), .P(6), .ZERO_PP(PP_RND), .ZERO_SUM(NO_APPROX), .ZERO_CARRY(NO_APPROX))
    u_pp (.w(w), .x(x), .y(y_pp));
  tram_axm #(.B(4), .P(3), .ZERO_PP(F1_PP), .ZERO_SUM(F1_SC), .ZERO_CARRY(F1_SC))
    u_fig1 (.w(w[3:0]), .x(x[3:0]), .y(y_fig1));

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s w=%0d x=%0d got=%0d exp=%0d", what, w, x, got, exp);
    end
  endtask

  initial begin : watchdog
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic theta_t th_all8, th_fig1;
    automatic longint prod, e_all8, e_fig1;
    for (int c = 0; c < 2 * MAX_B; c++) begin
      th_all8[c] = (c < 8) ? 1.0 : 0.0;
      th_fig1[c] = (c < 3) ? 1.0 : 0.0;
    end
    for (int v = 0; v < 65536; v++) begin
      {w, x} = 16'(v);
      #1;
      prod   = longint'(w) * longint'(x);
      e_all8 = longint'(closed_form(8, 8, th_all8, longint'(w), longint'(x)));
      e_fig1 = longint'(closed_form(4, 3, th_fig1, longint'(w[3:0]), longint'(x[3:0])));
      check("exact", longint'(y_exact), prod);
      check("default", longint'(y_def), ref_axm(8, 8, NO_APPROX, INIT_ZERO_SUM, INIT_ZERO_CARRY, longint'(w), longint'(x)));
      check("all8", longint'(y_all8), e_all8);
      check("plim", longint'(y_plim), prod);
      check("p4", longint'(y_p4), ref_axm(8, 4, NO_APPROX, ALL, NO_APPROX, longint'(w), longint'(x)));
      check("carry", longint'(y_cy), ref_axm(8, 8, NO_APPROX, NO_APPROX, CY_RND, longint'(w), longint'(x)));
      check("pp", longint'(y_pp), ref_axm(8, 6, PP_RND, NO_APPROX, NO_APPROX, longint'(w), longint'(x)));
      check("fig1", longint'(y_fig1), e_fig1);
      check("fig1_model", longint'(y_fig1), ref_axm(4, 3, F1_PP, F1_SC, F1_SC, longint'(w[3:0]), longint'(x[3:0])));
      // Columns 4 and above of the P=4 structure stay exact: the product's
      // upper part can only be off by what columns 0..3 can carry out.
      checks++;
      if (longint'(y_p4) > prod || prod - longint'(y_p4) >= 16 * 8) failures++;
      if (longint'(y_def)  != prod) n_def_err++;
      if (longint'(y_all8) != prod) n_all8_err++;
      if (longint'(y_p4)   != prod) n_p4_err++;
      if (longint'(y_cy)   != prod) n_cy_err++;
      if (longint'(y_pp)   != prod) n_pp_err++;
      if (longint'(y_fig1) != longint'(w[3:0]) * longint'(x[3:0])) n_fig1_err++;
      if (longint'(y_plim) == prod) n_plim_exact++;
    end
    $display("inexact products: default %0d, all8 %0d, sum/P=4 %0d, carry %0d, pp %0d, fig1 %0d",
             n_def_err, n_all8_err, n_p4_err, n_cy_err, n_pp_err, n_fig1_err);
    $display("column limit kept %0d of 65536 products exact", n_plim_exact);
    // Every mechanism must have acted at least once.
    checks += 5;
    if (n_pp_err == 0)   begin failures++; $display("FAIL partial-product removal never acted"); end
    if (n_p4_err == 0)   begin failures++; $display("FAIL sum removal never acted"); end
    if (n_cy_err == 0)   begin failures++; $display("FAIL carry removal never acted"); end
    if (n_plim_exact != 65536) begin failures++; $display("FAIL column limit"); end
    if (n_def_err == 0 || n_fig1_err == 0) begin failures++; $display("FAIL default/fig1 exact"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

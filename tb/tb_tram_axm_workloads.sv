// tb_tram_axm_workloads -- the multiplier in the other two sizes evaluated
// with the structure search besides the 8-bit, 8-column default:
//   u_w4a4 : 4-bit operands, up to P = 4 approximable columns (4-bit
//            weights and activations),
//   u_w8p6 : 8-bit operands, P = 6 (the setting used for transformers).
// For each, the greedy mapping is rerun in software from the search's
// starting point (every column below 4 fully removed, theta_c = 1, the rest
// theta_c = 0), the resulting masks must equal those the instance is built
// with, and every input pair must give the software model's product.
//   u_frac : 8-bit, P = 8, with fractional structure parameters
//            theta = (1, 1, 1, 0.5, 0.5, 0.25, 0, 0): columns only partly
//            removed. The mapping must give the masks FR_SUM / FR_CARRY
//            (worked out beforehand with an independent model of the same
//            search), and the instance built with them is checked the same way.
module tb_tram_axm_workloads;
  import tram_pkg::*;
  import tb_axm_ref_pkg::*;

  logic [7:0]  w, x;
  logic [7:0]  y4;
  logic [15:0] y8, yf;
  localparam cand_mask_t FR_SUM   = cand_mask_t'(128'h0001_0003_0007_000f_0000);
  localparam cand_mask_t FR_CARRY = cand_mask_t'(128'h000f_0000);
  int checks = 0, failures = 0;

  tram_axm #(.B(4), .P(4)) u_w4a4 (.w(w[3:0]), .x(x[3:0]), .y(y4));
  tram_axm #(.B(8), .P(6)) u_w8p6 (.w(w), .x(x), .y(y8));
  tram_axm #(.B(8), .P(8), .ZERO_PP(NO_APPROX), .ZERO_SUM(FR_SUM), .ZERO_CARRY(FR_CARRY))
    u_frac (.w(w), .x(x), .y(yf));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_size(int B, int P, bit frac, theta_t th, cand_mask_t exp_s,
                          cand_mask_t exp_c);
    automatic cand_mask_t zs, zc;
    automatic longint got, n_err = 0, max_ed = 0, ed;
    greedy_map(B, P, th, zs, zc);
    checks += 2;
    // Bits of rows/positions outside a B-bit array are meaningless there.
    for (int r = 0; r < MAX_B; r++)
      for (int k = 0; k < MAX_B; k++)
        if (r < B && k < B && r + k < P) begin
          if (zs[r][k] != exp_s[r][k] || zc[r][k] != exp_c[r][k]) begin
            failures++;
            $display("FAIL B=%0d P=%0d mapped mask differs at row %0d pos %0d", B, P, r, k);
          end
        end
    for (int v = 0; v < (1 << (2 * B)); v++) begin
      {w, x} = (B == 4) ? {4'h0, 4'(v >> 4), 4'h0, 4'(v)} : 16'(v);
      #1;
      got = (B == 4) ? longint'(y4) : frac ? longint'(yf) : longint'(y8);
      checks++;
      if (got != ref_axm(B, P, '0, zs, zc, longint'(w), longint'(x))) begin
        failures++;
        if (failures < 20) $display("FAIL B=%0d w=%0d x=%0d y=%0d", B, w, x, got);
      end
      ed = longint'(w) * longint'(x) - got;
      if (ed < 0) ed = -ed;
      if (ed != 0) n_err++;
      if (ed > max_ed) max_ed = ed;
    end
    $display("B=%0d P=%0d theta_3=%0.2f: %0d of %0d products inexact, MaxED %0d", B, P, th[3], n_err,
             1 << (2 * B), max_ed);
    checks++;
    if (n_err == 0) begin failures++; $display("FAIL B=%0d structure is exact", B); end
  endtask

  initial begin
    automatic theta_t th_init, th_frac;
    for (int c = 0; c < 2 * MAX_B; c++) begin
      th_init[c] = (c < 4) ? 1.0 : 0.0;
      th_frac[c] = 0.0;
    end
    th_frac[0] = 1.0; th_frac[1] = 1.0; th_frac[2] = 1.0;
    th_frac[3] = 0.5; th_frac[4] = 0.5; th_frac[5] = 0.25;
    run_size(4, 4, 1'b0, th_init, INIT_ZERO_SUM, INIT_ZERO_CARRY);
    run_size(8, 6, 1'b0, th_init, INIT_ZERO_SUM, INIT_ZERO_CARRY);
    run_size(8, 8, 1'b1, th_frac, FR_SUM, FR_CARRY);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

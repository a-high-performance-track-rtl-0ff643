// tb_barrel_tracks - physics check of one fitter on helix tracks in a barrel
// whose modules are staggered in radius.
//
// Six barrel layers at nominal radii of 23 to 108 cm, B = 3.8 T. Every hit
// lies up to +-1.5 cm off its layer's nominal radius, the nonlinearity the
// hit transformation is meant to remove. Tracks have 2 < pT < 100 GeV
// (uniform in 1/pT), either charge, |phi0| < 0.3, |cot theta| < 1 and
// |z0| < 10 cm; hits are computed from the exact helix and rounded to the
// input formats.
//
// The constants are derived here rather than trained: on the ideal cylinders
// phi' = phi0 - R' c and z' = z0 + R' cot theta are exactly linear, so the
// final fits are straight-line least-squares fits with R' = the nominal
// radii. The pre-estimates use the same fits on the raw coordinates. The
// chi rows are the residuals of slots 0-3 about the fitted line.
//
// The checks:
//   - the fitted q/(2 rho) is much closer to the truth than the
//     pre-estimate (same fit, no transformation): RMS relative error below
//     0.5 % and at most 1/3 of the pre-estimate's,
//   - phi0, z0 and cot theta are within tolerance of the truth,
//   - the chi components stay small for good tracks and grow when one hit
//     is displaced by 5 mrad.
module tb_barrel_tracks;
  import tf_pkg::*;

  localparam int   LAT = 39, NTRK = 2000;
  localparam real  BFIELD = 3.8;
  localparam real  RN [6] = '{23.0, 35.7, 50.8, 68.6, 88.3, 108.0};

  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic in_valid, out_valid;
  logic [REGION_W-1:0] in_region;
  hit_t in_hits [N_LAYERS];
  fit_out_t out_trk;

  track_fitter dut (.clk(clk), .rst_n(rst_n), .cfg(cfg), .in_valid(in_valid),
    .in_region(in_region), .in_hits(in_hits), .out_valid(out_valid), .out_trk(out_trk));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // straight-line fit weights: slope a_j = (u_j - ubar)/S, intercept b_j = 1/6 - ubar a_j
  real a [6], b [6], ubar, S;

  task automatic wr(input cfg_table_e t, input int s, input int i, input real v);
    @(negedge clk);
    cfg.we = 1; cfg.table_sel = t; cfg.set = SET_W'(s); cfg.idx = 6'(i);
    cfg.data = word_t'($rtoi(v + ((v >= 0) ? 0.5 : -0.5)));
  endtask

  task automatic load_constants();
    ubar = 0; S = 0;
    foreach (RN[j]) ubar += RN[j] / 6.0;
    foreach (RN[j]) S += (RN[j] - ubar) ** 2;
    foreach (RN[j]) begin a[j] = (RN[j] - ubar) / S; b[j] = 1.0 / 6.0 - ubar * a[j]; end
    // set 0 = region 0, six hits; all means and offsets zero
    for (int i = 0; i < K_PRE_C; i++)  wr(TBL_PRE_C, 0, i, i < 6 ? -a[i] * 2.0**20 : 0.0);
    for (int i = 0; i < K_PRE_RZ; i++) wr(TBL_PRE_TAN, 0, i, 0.0);
    for (int i = 0; i < K_PRE_RZ; i++) wr(TBL_PRE_COT, 0, i, i < 6 ? a[i] * 2.0**16 : 0.0);
    for (int i = 0; i < K_RIDEAL; i++) wr(TBL_RIDEAL, 0, i, RN[i] * 256.0);
    for (int h = 0; h < 2; h++)
      for (int i = 0; i < K_FIT; i++) begin
        real v;
        int row, col;
        row = i / 6; col = i % 6;
        v = 0.0;
        if (i < 36) begin
          if (row == 0) v = -a[col] * 2.0**20;                  // c in 2^-23 /cm
          else if (row == 1) v = b[col] * 2.0**12;              // phi0 in 2^-15 rad
          else v = ((col == row - 2) ? 1.0 : 0.0) - b[col] - RN[row - 2] * a[col];  // residual
          if (row >= 2) v = v * 2.0**12;
        end
        wr(TBL_FIT_T, h, i, v);
      end
    for (int i = 0; i < K_FIT; i++) begin
      real v;
      int row, col;
      row = i / 6; col = i % 6;
      v = 0.0;
      if (i < 36) begin
        if (row == 0) v = b[col] * 2.0**12;                     // z0 in 2^-8 cm
        else if (row == 1) v = a[col] * 2.0**16;                // cot in 2^-12
        else v = (((col == row - 2) ? 1.0 : 0.0) - b[col] - RN[row - 2] * a[col]) * 2.0**12;
      end
      wr(TBL_FIT_Z, 0, i, v);
    end
    @(negedge clk);
    cfg = '0;
  endtask

  typedef struct { real c, phi0, cot, z0; bit bad; } truth_t;
  truth_t tq [$];

  real se_fit = 0, se_pre = 0, se_phi = 0, se_z0 = 0, se_cot = 0;
  real chi_good = 0, chi_bad = 0;
  int  n_good = 0, n_bad = 0, n_out = 0;

  initial begin
    cfg = '0; in_valid = 0; in_region = '0;
    foreach (in_hits[j]) in_hits[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_constants();

    fork
      // driver
      for (int n = 0; n < NTRK; n++) begin
        truth_t t;
        real invpt, q, rr, ph, zz, cpre;
        @(negedge clk);
        invpt = 0.01 + 0.49 * ($urandom_range(1000000) / 1.0e6);
        q     = ($urandom_range(1) != 0) ? 1.0 : -1.0;
        t.c    = q * 0.3 * BFIELD / 2.0 * invpt / 100.0;     // q/(2 rho) in 1/cm
        t.phi0 = 0.6 * ($urandom_range(1000000) / 1.0e6 - 0.5);
        t.cot  = 2.0 * ($urandom_range(1000000) / 1.0e6 - 0.5);
        t.z0   = 20.0 * ($urandom_range(1000000) / 1.0e6 - 0.5);
        t.bad  = (n % 10 == 9);
        cpre = 0;
        for (int j = 0; j < 6; j++) begin
          rr = RN[j] + 3.0 * ($urandom_range(1000000) / 1.0e6 - 0.5);
          ph = t.phi0 - $asin(rr * t.c);
          zz = t.z0 + $asin(rr * t.c) / t.c * t.cot;
          if (t.bad && j == 2) ph += 0.005;
          in_hits[j].valid = 1; in_hits[j].two_s = 0; in_hits[j].ring = '0; in_hits[j].strip_off = '0;
          in_hits[j].r   = word_t'($rtoi(rr * 256.0 + 0.5));
          in_hits[j].phi = word_t'($rtoi(ph * 32768.0 + ((ph >= 0) ? 0.5 : -0.5)));
          in_hits[j].z   = word_t'($rtoi(zz * 256.0 + ((zz >= 0) ? 0.5 : -0.5)));
          cpre += -a[j] * ph;                  // the same fit on the raw phi
        end
        in_valid = 1; in_region = '0;
        if (!t.bad) se_pre += ((cpre - t.c) / t.c) ** 2;
        tq.push_back(t);
      end
      // monitor
      while (n_out < NTRK) begin
        @(negedge clk);
        if (out_valid) begin
          truth_t t;
          real c_fit, chi2;
          t = tq.pop_front();
          n_out++;
          c_fit = real'(out_trk.q_over_pt) / 2.0**23;
          chi2 = 0;
          for (int i = 0; i < N_CHI; i++) chi2 += (real'($signed(out_trk.chi_t[i])) / 32768.0 / 1e-4) ** 2;
          if (t.bad) begin chi_bad += chi2; n_bad++; end
          else begin
            chi_good += chi2; n_good++;
            se_fit += ((c_fit - t.c) / t.c) ** 2;
            se_phi += (real'(out_trk.phi0) / 32768.0 - t.phi0) ** 2;
            se_z0  += (real'(out_trk.z0) / 256.0 - t.z0) ** 2;
            se_cot += (real'(out_trk.cot_theta) / 4096.0 - t.cot) ** 2;
          end
        end
      end
    join
    in_valid = 0;
    begin
      real rf, rp, rphi, rz0, rcot, cg, cb;
      rf = $sqrt(se_fit / n_good); rp = $sqrt(se_pre / n_good);
      rphi = $sqrt(se_phi / n_good); rz0 = $sqrt(se_z0 / n_good); rcot = $sqrt(se_cot / n_good);
      cg = chi_good / n_good; cb = chi_bad / n_bad;
      $display("RMS relative error of q/2rho: final fit %.4f %%, pre-estimate (no transformation) %.4f %%", 100*rf, 100*rp);
      $display("RMS phi0 error %.2e rad, z0 error %.4f cm, cot theta error %.2e", rphi, rz0, rcot);
      $display("mean sum of chi^2 (in units of 0.1 mrad): good tracks %.2f, tracks with a displaced hit %.2f", cg, cb);
      checks++; if (!(rf < 0.005))      begin failures++; $display("final q/2rho not accurate enough"); end
      checks++; if (!(rf < rp / 3.0))   begin failures++; $display("transformation does not improve the fit"); end
      checks++; if (!(rphi < 2e-4))     begin failures++; $display("phi0 off"); end
      checks++; if (!(rz0 < 0.05))      begin failures++; $display("z0 off"); end
      checks++; if (!(rcot < 2e-3))     begin failures++; $display("cot theta off"); end
      checks++; if (!(cb > 20.0 * cg))  begin failures++; $display("chi does not flag the displaced hit"); end
      checks++; if (n_out != NTRK)      begin failures++; $display("lost tracks"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

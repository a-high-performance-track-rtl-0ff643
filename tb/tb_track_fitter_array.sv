// tb_track_fitter_array - end-to-end test of the top level with every
// parameter at its default: eight fitters, 14 regions x 7 hit combinations.
//
// Loads all constant tables once over the shared write bus, then feeds each
// of the eight fitters its own random track stream (a track per cycle with
// occasional gaps) and compares every result with the reference model,
// including the 39-cycle latency. It counts the mechanisms of the design
// and fails if one never occurred: low- and high-pT constant sets, five-hit
// tracks, dropped tracks, strip-corrected 2S hits, back-to-back tracks and
// all eight fitters busy in the same cycle. The chi^2 output of every fit is
// checked against the sum of squares of the expected chi components.
module tb_track_fitter_array;
  import tf_pkg::*;
  import tf_model_pkg::*;
  import tf_fit_model_pkg::*;

  localparam int NF = 8, LAT = 39, NCYC_TRK = 1500;
  localparam int NCYC = NCYC_TRK + LAT + 10;

  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  logic in_valid [NF], out_valid [NF];
  logic [REGION_W-1:0] in_region [NF];
  hit_t in_hits [NF][N_LAYERS];
  fit_out_t out_trk [NF];
  logic [CHI2_W-1:0] out_chi2 [NF];

  track_fitter_array dut (.clk(clk), .rst_n(rst_n), .cfg(cfg), .in_valid(in_valid),
    .in_region(in_region), .in_hits(in_hits), .out_valid(out_valid), .out_trk(out_trk),
    .out_chi2(out_chi2));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_hi = 0, n_lo = 0, n_five = 0, n_drop = 0, n_corr = 0, n_b2b = 0, n_all8 = 0, n_fit = 0;
  pred_t exp_q [NF][NCYC];
  bit    exp_v [NF][NCYC];

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input cfg_table_e t, input int s, input int i, input longint v);
    @(negedge clk);
    cfg.we = 1; cfg.table_sel = t; cfg.set = SET_W'(s); cfg.idx = 6'(i); cfg.data = word_t'(v);
  endtask

  task automatic load_tables();
    for (int s = 0; s < NSET; s++) begin
      for (int i = 0; i < 13; i++) wr(TBL_PRE_C, s, i, kc[s][i]);
      for (int i = 0; i < 25; i++) wr(TBL_PRE_TAN, s, i, kt[s][i]);
      for (int i = 0; i < 25; i++) wr(TBL_PRE_COT, s, i, kk[s][i]);
      for (int i = 0; i < 6; i++)  wr(TBL_RIDEAL, s, i, rid[s][i]);
      for (int i = 0; i < 44; i++) wr(TBL_FIT_Z, s, i, fz[s][i]);
    end
    for (int s = 0; s < 2 * NSET; s++)
      for (int i = 0; i < 44; i++) wr(TBL_FIT_T, s, i, ft[s][i]);
    for (int g = 0; g < 16; g++) wr(TBL_INV_R2, g, 0, ir[g]);
    @(negedge clk);
    cfg = '0;
  endtask

  function automatic bit same(input fit_out_t o, input pred_t p);
    bit good;
    good = (longint'(o.set) == p.set) && (o.hi_pt == p.hi) &&
           (longint'(o.q_over_pt) == p.yt[0]) && (longint'(o.phi0) == p.yt[1]) &&
           (longint'(o.z0) == p.yz[0]) && (longint'(o.cot_theta) == p.yz[1]);
    for (int i = 0; i < N_CHI; i++)
      good &= (longint'($signed(o.chi_t[i])) == p.yt[2+i]) && (longint'($signed(o.chi_z[i])) == p.yz[2+i]);
    return good;
  endfunction

  function automatic longint exp_chi2(input pred_t p);
    longint s = 0;
    for (int i = 0; i < N_CHI; i++) s += p.yt[2+i] * p.yt[2+i] + p.yz[2+i] * p.yz[2+i];
    return s;
  endfunction

  initial begin
    bit prev_v [NF];
    cfg = '0;
    for (int f = 0; f < NF; f++) begin
      in_valid[f] = 0; in_region[f] = '0; prev_v[f] = 0;
      foreach (in_hits[f][j]) in_hits[f][j] = '0;
    end
    gen_tables();
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_tables();
    for (int n = 0; n < NCYC; n++) begin
      int busy;
      @(negedge clk);
      busy = 0;
      for (int f = 0; f < NF; f++) begin
        checks++;
        if (out_valid[f] !== exp_v[f][n]) begin
          failures++; $display("fitter %0d cycle %0d: out_valid=%b expected %b", f, n, out_valid[f], exp_v[f][n]);
        end else if (exp_v[f][n]) begin
          checks++; n_fit++;
          if (!same(out_trk[f], exp_q[f][n])) begin
            failures++; $display("fitter %0d: wrong result for the track of cycle %0d", f, n - LAT);
          end
          checks++;
          if (longint'(out_chi2[f]) != exp_chi2(exp_q[f][n])) begin
            failures++; $display("fitter %0d: chi2 %0d expected %0d", f, out_chi2[f], exp_chi2(exp_q[f][n]));
          end
        end
        if (n < NCYC_TRK && $urandom_range(9) != 0) begin
          int reg_n;
          mhit_t mh [6];
          pred_t p;
          rand_track(reg_n, mh);
          in_valid[f]  = 1;
          in_region[f] = REGION_W'(reg_n);
          for (int j = 0; j < 6; j++) begin
            in_hits[f][j].valid     = mh[j].valid;
            in_hits[f][j].two_s     = mh[j].two_s;
            in_hits[f][j].ring      = RING_W'(mh[j].ring);
            in_hits[f][j].strip_off = SOFF_W'(mh[j].soff);
            in_hits[f][j].r         = word_t'(mh[j].r);
            in_hits[f][j].phi       = word_t'(mh[j].phi);
            in_hits[f][j].z         = word_t'(mh[j].z);
          end
          p = fit_track(reg_n, mh);
          exp_v[f][n + LAT] = p.ok;
          exp_q[f][n + LAT] = p;
          busy++;
          if (!p.ok) n_drop++;
          else begin
            if (p.hi) n_hi++; else n_lo++;
            if (p.nmiss == 1) n_five++;
            if (p.corr) n_corr++;
            if (prev_v[f]) n_b2b++;
          end
          prev_v[f] = 1;
        end else begin
          in_valid[f] = 0;
          prev_v[f] = 0;
        end
      end
      if (busy == NF) n_all8++;
    end
    $display("fits checked %0d; high-pT %0d, low-pT %0d, five-hit %0d, dropped %0d, strip-corrected %0d, back-to-back %0d, all eight busy %0d",
             n_fit, n_hi, n_lo, n_five, n_drop, n_corr, n_b2b, n_all8);
    checks++; if (n_hi == 0)   begin failures++; $display("high-pT set never used"); end
    checks++; if (n_lo == 0)   begin failures++; $display("low-pT set never used"); end
    checks++; if (n_five == 0) begin failures++; $display("no five-hit track"); end
    checks++; if (n_drop == 0) begin failures++; $display("no dropped track"); end
    checks++; if (n_corr == 0) begin failures++; $display("strip correction never applied"); end
    checks++; if (n_b2b == 0)  begin failures++; $display("no back-to-back tracks"); end
    checks++; if (n_all8 == 0) begin failures++; $display("never all fitters busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_track_fitter - end-to-end test of one fitter at its default sizes.
//
// Loads every constant table with random constants through the write port,
// then streams random tracks back to back (one per cycle, with occasional
// idle cycles) and compares every result with the reference model: valid
// exactly 39 cycles after the track, q/pT, phi0, four transverse chi, z0,
// cot theta, four longitudinal chi, the pT set and the constant address.
// It counts the mechanisms the fitter has and fails if one never occurred:
// low-pT and high-pT constant sets, five-hit tracks, dropped tracks (two
// missing hits or bad region), strip-corrected 2S hits and back-to-back
// tracks. At least 10,000 tracks are sent, as many as the published
// comparison of the hardware with its software emulator used.
module tb_track_fitter;
  import tf_pkg::*;
  import tf_model_pkg::*;
  import tf_fit_model_pkg::*;

  localparam int LAT = 39, NTRK = 11200;   // about 10,000 tracks
  localparam int NCYC = NTRK + LAT + 10;

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
  int n_hi = 0, n_lo = 0, n_five = 0, n_drop = 0, n_corr = 0, n_b2b = 0, n_sent = 0;
  pred_t exp_q [NCYC];
  bit    exp_v [NCYC];

  initial begin
    #5000000;
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

  function automatic bit cmp(input string what, input longint got, input longint exp_val);
    if (got != exp_val) begin
      $display("%s: got %0d expected %0d", what, got, exp_val);
      return 1'b0;
    end
    return 1'b1;
  endfunction

  initial begin
    bit prev_v;
    cfg = '0; in_valid = 0; in_region = '0;
    foreach (in_hits[j]) in_hits[j] = '0;
    gen_tables();
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_tables();
    prev_v = 0;
    for (int n = 0; n < NCYC; n++) begin
      @(negedge clk);
      // check what left the pipeline this cycle
      checks++;
      if (out_valid !== exp_v[n]) begin
        failures++; $display("cycle %0d: out_valid=%b expected %b", n, out_valid, exp_v[n]);
      end else if (exp_v[n]) begin
        pred_t p;
        bit good;
        p = exp_q[n];
        good = 1;
        good &= cmp("set", longint'(out_trk.set), p.set);
        good &= cmp("hi_pt", longint'(out_trk.hi_pt), p.hi);
        good &= cmp("q/pT", longint'(out_trk.q_over_pt), p.yt[0]);
        good &= cmp("phi0", longint'(out_trk.phi0), p.yt[1]);
        good &= cmp("z0", longint'(out_trk.z0), p.yz[0]);
        good &= cmp("cot", longint'(out_trk.cot_theta), p.yz[1]);
        for (int i = 0; i < N_CHI; i++) begin
          good &= cmp("chi_t", longint'($signed(out_trk.chi_t[i])), p.yt[2+i]);
          good &= cmp("chi_z", longint'($signed(out_trk.chi_z[i])), p.yz[2+i]);
        end
        checks++;
        if (!good) begin failures++; $display("  in track entering at cycle %0d", n - LAT); end
      end
      // drive the next track
      if (n < NTRK && $urandom_range(9) != 0) begin
        int reg_n;
        mhit_t mh [6];
        pred_t p;
        rand_track(reg_n, mh);
        in_valid  = 1;
        in_region = REGION_W'(reg_n);
        for (int j = 0; j < 6; j++) begin
          in_hits[j].valid     = mh[j].valid;
          in_hits[j].two_s     = mh[j].two_s;
          in_hits[j].ring      = RING_W'(mh[j].ring);
          in_hits[j].strip_off = SOFF_W'(mh[j].soff);
          in_hits[j].r         = word_t'(mh[j].r);
          in_hits[j].phi       = word_t'(mh[j].phi);
          in_hits[j].z         = word_t'(mh[j].z);
        end
        p = fit_track(reg_n, mh);
        n_sent++;
        exp_v[n + LAT] = p.ok;
        exp_q[n + LAT] = p;
        if (!p.ok) n_drop++;
        else begin
          if (p.hi) n_hi++; else n_lo++;
          if (p.nmiss == 1) n_five++;
          if (p.corr) n_corr++;
          if (prev_v) n_b2b++;
        end
        prev_v = 1;
      end else begin
        in_valid = 0;
        in_region = REGION_W'($urandom);
        prev_v = 0;
      end
    end
    $display("tracks sent %0d", n_sent);
    checks++; if (n_sent < 10000) begin failures++; $display("fewer than 10,000 tracks"); end
    $display("high-pT sets %0d, low-pT sets %0d, five-hit tracks %0d, dropped %0d, strip-corrected %0d, back-to-back %0d",
             n_hi, n_lo, n_five, n_drop, n_corr, n_b2b);
    checks++; if (n_hi == 0)   begin failures++; $display("high-pT set never used"); end
    checks++; if (n_lo == 0)   begin failures++; $display("low-pT set never used"); end
    checks++; if (n_five == 0) begin failures++; $display("no five-hit track"); end
    checks++; if (n_drop == 0) begin failures++; $display("no dropped track"); end
    checks++; if (n_corr == 0) begin failures++; $display("strip correction never applied"); end
    checks++; if (n_b2b == 0)  begin failures++; $display("no back-to-back tracks"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

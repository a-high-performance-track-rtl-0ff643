// track_fitter - one fully pipelined track fitter with hit transformation.
//
// A track arrives as six hit slots (R, phi, z per layer, inner to outer) and
// a region number. The fitter
//   1. forms the constant-set address from the region and the missing hit,
//      if any (const_addr),
//   2. computes coarse pre-estimates q/(2 rho), tan theta and cot theta by
//      linear fits of the raw hits (pre_estimate, 13 cycles), while the hits
//      wait in a delay line,
//   3. moves every hit onto the ideal cylinder of its layer, phi' and z'
//      (phi_transform, z_transform, 15 cycles), using the ideal radii R' of
//      the set and a 1/R^2 table for parallel-strip disk modules,
//   4. chooses the low- or high-pT transverse constants from q/(2 rho)
//      (pt_switch),
//   5. fits q/pT, phi0 and four transverse chi components from the six phi',
//      and z0, cot theta and four longitudinal chi components from the six z'
//      (lin_fit, 11 cycles).
// Latency 13 + 15 + 11 = 39 cycles; one track is accepted every cycle.
// out_valid(t+39) = in_valid(t) and the track has at most one missing hit.
// Constants live in fabric tables (const_ram) written through cfg; the
// tables must be loaded before tracks are sent. Coordinates of empty slots
// are forced to zero. The algorithm, constant counts and the stage latencies
// follow the published fitter; number formats, the address encoding, the
// load port and the reference-hit rule for the strip correction are this
// design's choices (see tf_pkg and the submodules).
module track_fitter import tf_pkg::*; #(
  parameter int LAT_PRE     = 13,
  parameter int LAT_TRANS   = 15,
  parameter int LAT_FIT     = 11,
  parameter int STRIP_PITCH = 590,
  parameter int PT_SWITCH_C = 4782
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_wr_t             cfg,
  input  logic                in_valid,
  input  logic [REGION_W-1:0] in_region,
  input  hit_t                in_hits [N_LAYERS],
  output logic                out_valid,
  output fit_out_t            out_trk
);
  localparam int LAT_TOTAL = LAT_PRE + LAT_TRANS + LAT_FIT;
  localparam int HITS_W    = N_LAYERS * $bits(hit_t);

  // ---------------------------------------------------------------- stage 0
  hit_t                hits0 [N_LAYERS];
  logic [N_LAYERS-1:0] hv0;
  logic [SET_W-1:0]    set0;
  logic                ok0;

  always_comb begin
    for (int j = 0; j < N_LAYERS; j++) begin
      hv0[j]   = in_hits[j].valid;
      hits0[j] = in_hits[j].valid ? in_hits[j] : '0;
    end
  end

  const_addr u_addr (.region(in_region), .hit_valid(hv0), .set(set0), .ok(ok0));

  // constant tables
  logic  we_c, we_tan, we_cot, we_rid, we_ft, we_fz, we_ir;
  assign we_c   = cfg.we && (cfg.table_sel == TBL_PRE_C);
  assign we_tan = cfg.we && (cfg.table_sel == TBL_PRE_TAN);
  assign we_cot = cfg.we && (cfg.table_sel == TBL_PRE_COT);
  assign we_rid = cfg.we && (cfg.table_sel == TBL_RIDEAL);
  assign we_ft  = cfg.we && (cfg.table_sel == TBL_FIT_T);
  assign we_fz  = cfg.we && (cfg.table_sel == TBL_FIT_Z);
  assign we_ir  = cfg.we && (cfg.table_sel == TBL_INV_R2);

  logic [SET_W-1:0] ra0 [1];
  word_t k_c   [1][K_PRE_C];
  word_t k_tan [1][K_PRE_RZ];
  word_t k_cot [1][K_PRE_RZ];
  assign ra0[0] = set0;

  const_ram #(.DEPTH(N_SETS), .WORDS(K_PRE_C)) u_k_c (
    .clk(clk), .we(we_c), .wset(cfg.set), .widx(cfg.idx), .wdata(cfg.data), .raddr(ra0), .rdata(k_c));
  const_ram #(.DEPTH(N_SETS), .WORDS(K_PRE_RZ)) u_k_tan (
    .clk(clk), .we(we_tan), .wset(cfg.set), .widx(cfg.idx), .wdata(cfg.data), .raddr(ra0), .rdata(k_tan));
  const_ram #(.DEPTH(N_SETS), .WORDS(K_PRE_RZ)) u_k_cot (
    .clk(clk), .we(we_cot), .wset(cfg.set), .widx(cfg.idx), .wdata(cfg.data), .raddr(ra0), .rdata(k_cot));

  // ------------------------------------------------------ pre-estimate 0..13
  word_t c13, tan13, cot13;
  pre_estimate #(.LATENCY(LAT_PRE)) u_pre (
    .clk(clk), .hits(hits0), .k_c(k_c[0]), .k_tan(k_tan[0]), .k_cot(k_cot[0]),
    .c(c13), .tan_th(tan13), .cot_th(cot13)
  );

  // hits and address wait for the pre-estimates
  logic [HITS_W-1:0] hits0_flat, hits13_flat;
  hit_t              hits13 [N_LAYERS];
  logic [SET_W-1:0]  set13, set28;
  always_comb for (int j = 0; j < N_LAYERS; j++) hits0_flat[j*$bits(hit_t) +: $bits(hit_t)] = hits0[j];
  always_comb for (int j = 0; j < N_LAYERS; j++) hits13[j] = hits13_flat[j*$bits(hit_t) +: $bits(hit_t)];

  pipe_delay #(.WIDTH(HITS_W), .DEPTH(LAT_PRE)) u_hit_dly (
    .clk(clk), .rst_n(rst_n), .d(hits0_flat), .q(hits13_flat));
  pipe_delay #(.WIDTH(SET_W), .DEPTH(LAT_PRE)) u_set_dly0 (
    .clk(clk), .rst_n(rst_n), .d(set0), .q(set13));
  pipe_delay #(.WIDTH(SET_W), .DEPTH(LAT_TRANS)) u_set_dly1 (
    .clk(clk), .rst_n(rst_n), .d(set13), .q(set28));

  // ---------------------------------------------------- transformation 13..28
  logic [SET_W-1:0] ra13 [1];
  word_t            r_id [1][K_RIDEAL];
  assign ra13[0] = set13;
  const_ram #(.DEPTH(N_SETS), .WORDS(K_RIDEAL)) u_k_rid (
    .clk(clk), .we(we_rid), .wset(cfg.set), .widx(cfg.idx), .wdata(cfg.data), .raddr(ra13), .rdata(r_id));

  logic [SET_W-1:0] ra_ring [N_LAYERS];
  word_t            inv_r2  [N_LAYERS][1];
  always_comb for (int j = 0; j < N_LAYERS; j++) ra_ring[j] = SET_W'(hits13[j].ring);
  const_ram #(.DEPTH(N_RINGS), .WORDS(1), .N_RD(N_LAYERS)) u_k_ir (
    .clk(clk), .we(we_ir), .wset(cfg.set), .widx(cfg.idx), .wdata(cfg.data), .raddr(ra_ring), .rdata(inv_r2));

  word_t ref_r, ref_z;
  logic  ref_ok;
  ref_select u_ref (.hits(hits13), .ref_r(ref_r), .ref_z(ref_z), .ok(ref_ok));

  word_t phi28 [N_LAYERS];
  word_t z28   [N_LAYERS];
  for (genvar j = 0; j < N_LAYERS; j++) begin : g_trans
    phi_transform #(.LATENCY(LAT_TRANS), .STRIP_PITCH(STRIP_PITCH)) u_phi (
      .clk(clk), .hit(hits13[j]), .c(c13), .tan_th(tan13), .r_ideal(r_id[0][j]),
      .ref_r(ref_r), .ref_z(ref_z), .ref_ok(ref_ok), .inv_r2(inv_r2[j][0]), .phi_p(phi28[j]));
    z_transform #(.LATENCY(LAT_TRANS)) u_z (
      .clk(clk), .hit(hits13[j]), .c(c13), .cot_th(cot13), .r_ideal(r_id[0][j]), .z_p(z28[j]));
  end

  // pT switch: registered at 14, carried to 28
  logic hi14, hi28;
  pt_switch #(.THRESH(PT_SWITCH_C)) u_pts (.clk(clk), .c(c13), .hi_pt(hi14));
  pipe_delay #(.WIDTH(1), .DEPTH(LAT_TRANS - 1)) u_pts_dly (
    .clk(clk), .rst_n(rst_n), .d(hi14), .q(hi28));

  // ------------------------------------------------------- final fit 28..39
  logic [SET_W-1:0] ra_t [1], ra_z [1];
  word_t            k_ft [1][K_FIT];
  word_t            k_fz [1][K_FIT];
  assign ra_t[0] = SET_W'({set28, hi28});
  assign ra_z[0] = set28;
  const_ram #(.DEPTH(2 * N_SETS), .WORDS(K_FIT)) u_k_ft (
    .clk(clk), .we(we_ft), .wset(cfg.set), .widx(cfg.idx), .wdata(cfg.data), .raddr(ra_t), .rdata(k_ft));
  const_ram #(.DEPTH(N_SETS), .WORDS(K_FIT)) u_k_fz (
    .clk(clk), .we(we_fz), .wset(cfg.set), .widx(cfg.idx), .wdata(cfg.data), .raddr(ra_z), .rdata(k_fz));

  word_t yt [N_LAYERS];
  word_t yz [N_LAYERS];
  lin_fit #(.LATENCY(LAT_FIT)) u_fit_t (.clk(clk), .x(phi28), .k(k_ft[0]), .y(yt));
  lin_fit #(.LATENCY(LAT_FIT)) u_fit_z (.clk(clk), .x(z28),   .k(k_fz[0]), .y(yz));

  // ------------------------------------------------------------- outputs
  logic [SET_W:0] meta39;
  pipe_delay #(.WIDTH(SET_W + 1), .DEPTH(LAT_FIT)) u_meta_dly (
    .clk(clk), .rst_n(rst_n), .d({hi28, set28}), .q(meta39));
  pipe_delay #(.WIDTH(1), .DEPTH(LAT_TOTAL), .RESET(1'b1)) u_vld_dly (
    .clk(clk), .rst_n(rst_n), .d(in_valid && ok0), .q(out_valid));

  always_comb begin
    out_trk.hi_pt     = meta39[SET_W];
    out_trk.set       = meta39[SET_W-1:0];
    out_trk.q_over_pt = yt[0];
    out_trk.phi0      = yt[1];
    out_trk.z0        = yz[0];
    out_trk.cot_theta = yz[1];
    for (int i = 0; i < N_CHI; i++) begin
      out_trk.chi_t[i] = yt[2 + i];
      out_trk.chi_z[i] = yz[2 + i];
    end
  end
endmodule

// phi_transform - moves the phi coordinate of one hit onto its ideal cylinder.
//
// With the curvature pre-estimate c = q/(2 rho) and x = R c, the hit at
// radius R is moved to the ideal radius R' of its layer by the polynomial
//   phi' = phi + (R - R') c + x^3 / 6
// (first order shift plus the cubic term of arcsin). Hits on parallel-strip
// (2S) disk modules get a further correction for strips that do not point
// at the beam line:
//   R_ex  = R_ref + (z - z_ref) tan_th          (radius extrapolated along
//                                                the track from a reference hit)
//   dphi  = p (h_sn - m_sn) (R_ex - R) / R^2
// with strip pitch p (STRIP_PITCH), the signed strip offset carried with the
// hit and 1/R^2 from a 16-entry table addressed by the module ring. The
// formulas are the published ones; the fixed-point steps are this design's:
// every intermediate result is rescaled by an arithmetic right shift and
// saturated to 18 bits, as it would be on the 18-bit port of a multiplier.
//   stage 1: x = R c, s = (R - R') c, dz = (z - z_ref) tan_th, m = off * p
//   stage 2: x2 = x x, dR = R_ref + dz - R
//   stage 3: x3 = x2 x, g = dR / R^2
//   stage 4: t = x3 / 6, dphi = m g (0 unless two_s and ref_ok)
//   stage 5: phi' = phi + s + t + dphi
// The result is padded to LATENCY cycles (15 in the published design).
module phi_transform import tf_pkg::*; #(
  parameter int LATENCY     = 15,
  parameter int STRIP_PITCH = 590   // 90 um in units of 2^-16 cm
) (
  input  logic  clk,
  input  hit_t  hit,
  input  word_t c,
  input  word_t tan_th,
  input  word_t r_ideal,
  input  word_t ref_r,
  input  word_t ref_z,
  input  logic  ref_ok,
  input  word_t inv_r2,
  output word_t phi_p
);
  typedef logic signed [ACC_W-1:0] acc_t;
  localparam int STAGES = 5;

  if (LATENCY < STAGES) begin : g_bad_latency
    $error("phi_transform: LATENCY must be at least 5");
  end

  localparam acc_t PITCH = acc_t'(STRIP_PITCH);

  // stage 1
  word_t x1, s1, dz1, phi1, r1, rref1, ir1;
  acc_t  m1;
  logic  en1;
  always_ff @(posedge clk) begin
    x1    <= sat_w((acc_t'(hit.r) * c) >>> RC_SHIFT);
    s1    <= sat_w(((acc_t'(hit.r) - acc_t'(r_ideal)) * c) >>> RC_SHIFT);
    dz1   <= sat_w(((acc_t'(hit.z) - acc_t'(ref_z)) * tan_th) >>> T_FRAC);
    m1    <= acc_t'(hit.strip_off) * PITCH;
    phi1  <= hit.phi;
    r1    <= hit.r;
    rref1 <= ref_r;
    ir1   <= inv_r2;
    en1   <= hit.valid && hit.two_s && ref_ok;
  end

  // stage 2
  word_t x2, xa2, s2, dr2, phi2, ir2;
  acc_t  m2;
  logic  en2;
  always_ff @(posedge clk) begin
    x2   <= sat_w((acc_t'(x1) * x1) >>> PHI_FRAC);
    dr2  <= sat_w(acc_t'(rref1) + acc_t'(dz1) - acc_t'(r1));
    xa2  <= x1;
    s2   <= s1;
    phi2 <= phi1;
    ir2  <= ir1;
    m2   <= m1;
    en2  <= en1;
  end

  // stage 3
  word_t x3, g3, s3, phi3;
  acc_t  m3;
  logic  en3;
  always_ff @(posedge clk) begin
    x3   <= sat_w((acc_t'(x2) * xa2) >>> PHI_FRAC);
    g3   <= sat_w((acc_t'(dr2) * ir2) >>> G_SHIFT);
    s3   <= s2;
    phi3 <= phi2;
    m3   <= m2;
    en3  <= en2;
  end

  // stage 4
  word_t t4, d4, s4, phi4;
  always_ff @(posedge clk) begin
    t4   <= sat_w((acc_t'(x3) * SIXTH) >>> SIXTH_FRAC);
    d4   <= en3 ? sat_w((m3 * g3) >>> DPHI_SHIFT) : '0;
    s4   <= s3;
    phi4 <= phi3;
  end

  // stage 5
  word_t phi5;
  always_ff @(posedge clk) phi5 <= sat_w(acc_t'(phi4) + acc_t'(s4) + acc_t'(t4) + acc_t'(d4));

  pipe_delay #(.WIDTH(W), .DEPTH(LATENCY - STAGES)) u_pad (
    .clk(clk), .rst_n(1'b1), .d(phi5), .q(phi_p)
  );
endmodule

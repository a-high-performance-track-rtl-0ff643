// z_transform - moves the z coordinate of one hit onto its ideal cylinder.
//
// With c = q/(2 rho) and cot_th from the pre-estimate, the hit at radius R
// is moved to the ideal radius R' of its layer by
//   z' = z - cot_th (R - R') - cot_th R^3 / (6 (2 rho)^2)
// The last term is formed as cot_th * R * (R c)^2 / 6, so the charge sign
// drops out. The formula is the published one; the fixed-point steps are this
// design's: every intermediate is rescaled by an arithmetic right shift and
// saturated to 18 bits.
//   stage 1: x = R c, a = (R - R') cot
//   stage 2: x2 = x x
//   stage 3: q = R x2
//   stage 4: q6 = q / 6
//   stage 5: b = q6 cot
//   stage 6: z' = z - a - b
// The result is padded to LATENCY cycles (the 15-cycle transformation budget
// of the transverse path is used for the longitudinal path as well).
module z_transform import tf_pkg::*; #(
  parameter int LATENCY = 15
) (
  input  logic  clk,
  input  hit_t  hit,
  input  word_t c,
  input  word_t cot_th,
  input  word_t r_ideal,
  output word_t z_p
);
  typedef logic signed [ACC_W-1:0] acc_t;
  localparam int STAGES = 6;

  if (LATENCY < STAGES) begin : g_bad_latency
    $error("z_transform: LATENCY must be at least 6");
  end

  // stage 1
  word_t x1, a1, z1, r1, cot1;
  always_ff @(posedge clk) begin
    x1   <= sat_w((acc_t'(hit.r) * c) >>> RC_SHIFT);
    a1   <= sat_w(((acc_t'(hit.r) - acc_t'(r_ideal)) * cot_th) >>> T_FRAC);
    z1   <= hit.z;
    r1   <= hit.r;
    cot1 <= cot_th;
  end

  // stage 2
  word_t x2, a2, z2, r2, cot2;
  always_ff @(posedge clk) begin
    x2   <= sat_w((acc_t'(x1) * x1) >>> PHI_FRAC);
    a2   <= a1;
    z2   <= z1;
    r2   <= r1;
    cot2 <= cot1;
  end

  // stage 3
  word_t q3, a3, z3, cot3;
  always_ff @(posedge clk) begin
    q3   <= sat_w((acc_t'(r2) * x2) >>> PHI_FRAC);
    a3   <= a2;
    z3   <= z2;
    cot3 <= cot2;
  end

  // stage 4
  word_t q4, a4, z4, cot4;
  always_ff @(posedge clk) begin
    q4   <= sat_w((acc_t'(q3) * SIXTH) >>> SIXTH_FRAC);
    a4   <= a3;
    z4   <= z3;
    cot4 <= cot3;
  end

  // stage 5
  word_t b5, a5, z5;
  always_ff @(posedge clk) begin
    b5 <= sat_w((acc_t'(q4) * cot4) >>> T_FRAC);
    a5 <= a4;
    z5 <= z4;
  end

  // stage 6
  word_t z6;
  always_ff @(posedge clk) z6 <= sat_w(acc_t'(z5) - acc_t'(a5) - acc_t'(b5));

  pipe_delay #(.WIDTH(W), .DEPTH(LATENCY - STAGES)) u_pad (
    .clk(clk), .rst_n(1'b1), .d(z6), .q(z_p)
  );
endmodule

// pt_switch - choice between the low-pT and high-pT final-fit constants.
//
// The transverse final fit has two constant sets, trained below and above a
// transverse momentum of 10 GeV. The switch compares the magnitude of the
// curvature pre-estimate c = q/(2 rho), which is proportional to 1/pT, with
// THRESH and registers hi_pt = (|c| < THRESH). The default THRESH = 4782 is
// 10 GeV in the c format of tf_pkg (2^-23 /cm) for a 3.8 T field, a value
// taken from the CMS magnet rather than from the fitter description.
// Timing: one register, hi_pt(t+1) from c(t).
module pt_switch import tf_pkg::*; #(
  parameter int THRESH = 4782
) (
  input  logic  clk,
  input  word_t c,
  output logic  hi_pt
);
  logic [W-1:0] c_abs;   // |c| fits W bits unsigned, -2^(W-1) included
  assign c_abs = c[W-1] ? W'(-c) : W'(c);

  always_ff @(posedge clk) hi_pt <= (int'(c_abs) < THRESH);
endmodule

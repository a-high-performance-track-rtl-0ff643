// chi2_sum - fit-quality value chi^2 from the chi components of a fit.
//
// The linearized fit gives, besides the track parameters, N - p chi
// components per plane: linear combinations of the hit coordinates that are
// zero for a track that fits perfectly. Their quadrature sum
//     chi2 = sum_i chi_i^2
// is distributed as a chi^2 while the linear approximation holds, and is the
// value a track-quality cut is applied to. This block squares and adds N
// such components; the top level feeds it the four transverse and four
// longitudinal components of each fitted track.
//
// Interface: chi[N] are W-bit signed components in the fit's output scale;
// chi2 is the unsigned exact sum of squares, CHI2_W = 2*W + 2 bits wide, so
// it never overflows for N <= 8. It is combinational: it is valid in the
// same cycle as the fit result it is formed from.
// The sum itself follows the published algorithm. Summing both planes into
// one value, keeping it exact and not registering it are this design's
// choices; the published firmware diagram stops at the chi components.
module chi2_sum import tf_pkg::*; #(
  parameter int N = 2 * N_CHI
) (
  input  word_t               chi [N],
  output logic [CHI2_W-1:0]   chi2
);
  always_comb begin
    chi2 = '0;
    for (int i = 0; i < N; i++)
      chi2 += CHI2_W'($unsigned(48'(chi[i]) * 48'(chi[i])));
  end
endmodule

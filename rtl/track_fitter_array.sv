// track_fitter_array - top level: N_FITTERS independent track fitters.
//
// The published implementation places eight fitter instances on one FPGA,
// each accepting a track per clock, for eight times the throughput of one
// fitter. Every instance here has its own track input and result output and
// its own copy of the constant tables; a single constant-write bus (cfg) is
// broadcast to all of them, so loading the tables once configures every
// instance. How the original instances shared inputs and constants is not
// published; the broadcast bus is this design's choice.
// Each result also carries its fit-quality value out_chi2[i], the sum of
// the squares of its four transverse and four longitudinal chi components,
// formed combinationally from out_trk[i] (see chi2_sum).
// Timing per instance: out_valid[i](t+39) follows in_valid[i](t); out_trk[i]
// and out_chi2[i] are valid in the cycle out_valid[i] is high.
module track_fitter_array import tf_pkg::*; #(
  parameter int N_FITTERS = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_wr_t             cfg,
  input  logic                in_valid  [N_FITTERS],
  input  logic [REGION_W-1:0] in_region [N_FITTERS],
  input  hit_t                in_hits   [N_FITTERS][N_LAYERS],
  output logic                out_valid [N_FITTERS],
  output fit_out_t            out_trk   [N_FITTERS],
  output logic [CHI2_W-1:0]   out_chi2  [N_FITTERS]
);
  for (genvar i = 0; i < N_FITTERS; i++) begin : g_fit
    track_fitter u_fit (
      .clk(clk), .rst_n(rst_n), .cfg(cfg),
      .in_valid(in_valid[i]), .in_region(in_region[i]), .in_hits(in_hits[i]),
      .out_valid(out_valid[i]), .out_trk(out_trk[i])
    );
    word_t chi [2 * N_CHI];
    always_comb
      for (int k = 0; k < N_CHI; k++) begin
        chi[k]         = out_trk[i].chi_t[k];
        chi[N_CHI + k] = out_trk[i].chi_z[k];
      end
    chi2_sum #(.N(2 * N_CHI)) u_chi2 (.chi(chi), .chi2(out_chi2[i]));
  end
endmodule

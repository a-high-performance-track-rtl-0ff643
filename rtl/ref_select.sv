// ref_select - reference hit for the radius extrapolation of 2S disk hits.
//
// Hits on parallel-strip (2S) disk modules do not know where along the strip
// the particle passed, so their true radius is extrapolated along the track
// from a hit that does: the outermost barrel layer or outermost inner disk
// hit. With slots ordered from inner to outer layer, this is the highest
// slot holding a valid hit that is not flagged two_s. ok is low if no such
// hit exists (the correction is then skipped). The slot order and the
// selection rule are this design's reading of the published description.
// Purely combinational.
module ref_select import tf_pkg::*; (
  input  hit_t  hits [N_LAYERS],
  output word_t ref_r,
  output word_t ref_z,
  output logic  ok
);
  always_comb begin
    ref_r = '0;
    ref_z = '0;
    ok    = 1'b0;
    for (int j = 0; j < N_LAYERS; j++) begin
      if (hits[j].valid && !hits[j].two_s) begin
        ref_r = hits[j].r;
        ref_z = hits[j].z;
        ok    = 1'b1;
      end
    end
  end
endmodule

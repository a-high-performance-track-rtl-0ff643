// const_addr - constant-set address ("address selects constants").
//
// A track is fitted with the constants of its detector region and of its hit
// combination: all six layer slots present (combination 0) or exactly one
// slot k missing (combination k+1), giving N_REGIONS x (N_LAYERS+1) sets.
// The address is set = region + N_REGIONS * combination. ok is low when two
// or more hits are missing or the region number is out of range; such a
// track cannot be fitted. The region/combination split follows the published
// constant count; the numeric encoding is this design's choice.
// Purely combinational.
module const_addr import tf_pkg::*; #(
  parameter int N_REG = N_REGIONS,
  parameter int N_LAY = N_LAYERS
) (
  input  logic [REGION_W-1:0] region,
  input  logic [N_LAY-1:0]    hit_valid,
  output logic [SET_W-1:0]    set,
  output logic                ok
);
  int n_missing;
  int combo;

  always_comb begin
    n_missing = 0;
    combo     = 0;
    for (int k = 0; k < N_LAY; k++) begin
      if (!hit_valid[k]) begin
        n_missing = n_missing + 1;
        combo     = k + 1;
      end
    end
    ok  = (n_missing <= 1) && (int'(region) < N_REG);
    set = ok ? SET_W'(int'(region) + N_REG * combo) : '0;
  end
endmodule

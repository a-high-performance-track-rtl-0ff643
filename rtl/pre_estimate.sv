// pre_estimate - coarse track pre-estimates from the raw hits.
//
// Three linear fits with one constant set per region and hit combination:
//   c      = q/(2 rho) = sum_j A_j (phi_j - phibar_j) + cbar          (13 constants)
//   tan_th = sum_j Az_j (z_j - zbar_j) + AR_j (R_j - Rbar_j) + tanbar (25 constants)
//   cot_th = same form with its own 25 constants
// c drives the phi and z transformations and the pT switch, tan_th the
// parallel-strip correction and cot_th the z transformation. Each is a
// chained MACC scalar product (macc_chain): the 12-term tan/cot chains take
// 13 cycles, the 6-term c chain is padded to the same LATENCY (13 cycles in
// the published design). Constant layout: see tf_pkg (I_PC_*, I_RZ_*).
// Interface: hits and constants sampled in cycle t, results in t+LATENCY.
module pre_estimate import tf_pkg::*; #(
  parameter int LATENCY = 13
) (
  input  logic  clk,
  input  hit_t  hits  [N_LAYERS],
  input  word_t k_c   [K_PRE_C],
  input  word_t k_tan [K_PRE_RZ],
  input  word_t k_cot [K_PRE_RZ],
  output word_t c,
  output word_t tan_th,
  output word_t cot_th
);
  localparam int NRZ = 2 * N_LAYERS;

  word_t phi_x [N_LAYERS], phi_bar [N_LAYERS], phi_a [N_LAYERS];
  word_t rz_x [NRZ], tan_bar [NRZ], tan_a [NRZ], cot_bar [NRZ], cot_a [NRZ];

  always_comb begin
    for (int j = 0; j < N_LAYERS; j++) begin
      phi_x[j]   = hits[j].phi;
      phi_bar[j] = k_c[I_PC_XBAR + j];
      phi_a[j]   = k_c[I_PC_A + j];
      rz_x[j]             = hits[j].z;
      rz_x[N_LAYERS + j]  = hits[j].r;
      tan_bar[j]            = k_tan[I_RZ_ZBAR + j];
      tan_bar[N_LAYERS + j] = k_tan[I_RZ_RBAR + j];
      tan_a[j]              = k_tan[I_RZ_AZ + j];
      tan_a[N_LAYERS + j]   = k_tan[I_RZ_AR + j];
      cot_bar[j]            = k_cot[I_RZ_ZBAR + j];
      cot_bar[N_LAYERS + j] = k_cot[I_RZ_RBAR + j];
      cot_a[j]              = k_cot[I_RZ_AZ + j];
      cot_a[N_LAYERS + j]   = k_cot[I_RZ_AR + j];
    end
  end

  macc_chain #(.N(N_LAYERS), .LATENCY(LATENCY)) u_c (
    .clk(clk), .x(phi_x), .xbar(phi_bar), .a(phi_a), .mean(k_c[I_PC_MEAN]), .y(c)
  );
  macc_chain #(.N(NRZ), .LATENCY(LATENCY)) u_tan (
    .clk(clk), .x(rz_x), .xbar(tan_bar), .a(tan_a), .mean(k_tan[I_RZ_MEAN]), .y(tan_th)
  );
  macc_chain #(.N(NRZ), .LATENCY(LATENCY)) u_cot (
    .clk(clk), .x(rz_x), .xbar(cot_bar), .a(cot_a), .mean(k_cot[I_RZ_MEAN]), .y(cot_th)
  );
endmodule

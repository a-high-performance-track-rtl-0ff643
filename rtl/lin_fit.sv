// lin_fit - final linearized fit of one plane.
//
// Multiplies the six transformed coordinates, minus their means, by a 6x6
// matrix: row 0 and row 1 give the two track parameters of the plane (q/pT
// and phi0 in the transverse plane, z0 and cot theta in the longitudinal
// plane) after adding their central values; rows 2..5 give the four chi
// components of the fit-quality sum, whose central values are zero. A set
// holds 44 constants (tf_pkg: I_FIT_M row-major matrix, I_FIT_XBAR means of
// the coordinates, I_FIT_MEAN0/1). Each row is one chained MACC scalar
// product; all six run side by side, so a new track is accepted every cycle.
// Interface: x and k sampled in cycle t, y in t+LATENCY (11 cycles in the
// published design; 7 of them are the chain, the rest are pad registers).
module lin_fit import tf_pkg::*; #(
  parameter int LATENCY = 11
) (
  input  logic  clk,
  input  word_t x [N_LAYERS],
  input  word_t k [K_FIT],
  output word_t y [N_LAYERS]
);
  word_t xbar [N_LAYERS];
  always_comb for (int j = 0; j < N_LAYERS; j++) xbar[j] = k[I_FIT_XBAR + j];

  for (genvar i = 0; i < N_LAYERS; i++) begin : g_row
    word_t a [N_LAYERS];
    word_t mean;
    always_comb for (int j = 0; j < N_LAYERS; j++) a[j] = k[I_FIT_M + N_LAYERS * i + j];
    if (i == 0)      begin : g_m0 assign mean = k[I_FIT_MEAN0]; end
    else if (i == 1) begin : g_m1 assign mean = k[I_FIT_MEAN1]; end
    else             begin : g_mc assign mean = '0; end

    macc_chain #(.N(N_LAYERS), .LATENCY(LATENCY)) u_row (
      .clk(clk), .x(x), .xbar(xbar), .a(a), .mean(mean), .y(y[i])
    );
  end
endmodule

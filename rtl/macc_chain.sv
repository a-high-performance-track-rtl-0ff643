// macc_chain - scalar product y = sum_j A_j (x_j - xbar_j) + mean as a chain
// of multiply-accumulate stages.
//
// Stage k subtracts the mean coordinate (the DSP pre-adder), multiplies by
// its coefficient and adds the partial sum handed over by stage k-1, like a
// column of cascaded DSP slices. The head of the chain starts from
// mean << FRAC. Operands of term k are skewed by k registers so that each
// arrives together with its partial sum; a new product enters every cycle.
// The last partial sum is shifted right by FRAC (truncating), saturated to
// W bits and registered, which gives an intrinsic latency of N + 1 cycles;
// further registers pad the result to LATENCY. Implementing the scalar
// products as chained MACCs follows the published firmware; the fixed-point
// scaling is this design's own.
// Interface: x, xbar, a, mean sampled in cycle t; y valid in cycle t+LATENCY.
module macc_chain import tf_pkg::*; #(
  parameter int N       = 6,
  parameter int LATENCY = N + 1,
  parameter int FRAC    = COEF_FRAC
) (
  input  logic  clk,
  input  word_t x    [N],
  input  word_t xbar [N],
  input  word_t a    [N],
  input  word_t mean,
  output word_t y
);
  typedef logic signed [ACC_W-1:0] acc_t;

  if (LATENCY < N + 1) begin : g_bad_latency
    $error("macc_chain: LATENCY must be at least N + 1");
  end

  acc_t acc [N];

  for (genvar k = 0; k < N; k++) begin : g_term
    word_t xk, xbk, ak;
    if (k == 0) begin : g_head
      assign xk  = x[0];
      assign xbk = xbar[0];
      assign ak  = a[0];
    end else begin : g_skew
      word_t sx [k];
      word_t sxb[k];
      word_t sa [k];
      always_ff @(posedge clk) begin
        sx[0]  <= x[k];
        sxb[0] <= xbar[k];
        sa[0]  <= a[k];
        for (int i = 1; i < k; i++) begin
          sx[i]  <= sx[i-1];
          sxb[i] <= sxb[i-1];
          sa[i]  <= sa[i-1];
        end
      end
      assign xk  = sx[k-1];
      assign xbk = sxb[k-1];
      assign ak  = sa[k-1];
    end

    logic signed [W:0] dx;      // pre-adder
    acc_t              prod;
    assign dx   = xk - xbk;
    assign prod = ak * dx;

    if (k == 0) begin : g_first
      always_ff @(posedge clk) acc[0] <= (acc_t'(mean) <<< FRAC) + prod;
    end else begin : g_next
      always_ff @(posedge clk) acc[k] <= acc[k-1] + prod;
    end
  end

  word_t y_r;
  always_ff @(posedge clk) y_r <= sat_w(acc[N-1] >>> FRAC);

  pipe_delay #(.WIDTH(W), .DEPTH(LATENCY - N - 1)) u_pad (
    .clk(clk), .rst_n(1'b1), .d(y_r), .q(y)
  );
endmodule

// tb_macc_chain - streams a new random operand set into two chains every
// cycle (6 terms at the intrinsic latency of 7, 12 terms padded to 13) and
// compares each result, LATENCY cycles later, with the scalar product
// computed by the reference model. Also checks saturation at both ends.
module tb_macc_chain;
  import tf_pkg::*;
  import tf_model_pkg::*;
  localparam int NA = 6,  LA = 7;
  localparam int NB = 12, LB = 13;
  localparam int NV = 300;
  logic clk = 0;
  word_t xa[NA], xba[NA], aa[NA], ma, ya;
  word_t xb[NB], xbb[NB], ab[NB], mb, yb;
  longint ea [NV], eb [NV];
  int checks = 0, failures = 0, n_sat = 0;

  macc_chain #(.N(NA), .LATENCY(LA)) dut_a (.clk(clk), .x(xa), .xbar(xba), .a(aa), .mean(ma), .y(ya));
  macc_chain #(.N(NB), .LATENCY(LB)) dut_b (.clk(clk), .x(xb), .xbar(xbb), .a(ab), .mean(mb), .y(yb));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < NV + LB; n++) begin
      @(negedge clk);
      if (n >= LA && n - LA < NV) begin
        checks++;
        if (longint'(ya) != ea[n-LA]) begin failures++; $display("A n=%0d y=%0d exp=%0d", n-LA, ya, ea[n-LA]); end
        if (ea[n-LA] == 131071 || ea[n-LA] == -131072) n_sat++;
      end
      if (n >= LB && n - LB < NV) begin
        checks++;
        if (longint'(yb) != eb[n-LB]) begin failures++; $display("B n=%0d y=%0d exp=%0d", n-LB, yb, eb[n-LB]); end
      end
      if (n < NV) begin
        longint x6[], xb6[], a6[], x12[], xb12[], a12[];
        int bits;
        bits = (n % 4 == 0) ? 18 : 13;   // mostly in range, some saturating
        x6 = new[NA]; xb6 = new[NA]; a6 = new[NA];
        x12 = new[NB]; xb12 = new[NB]; a12 = new[NB];
        for (int j = 0; j < NA; j++) begin
          x6[j] = srand(18); xb6[j] = srand(18); a6[j] = srand(bits);
          xa[j] = word_t'(x6[j]); xba[j] = word_t'(xb6[j]); aa[j] = word_t'(a6[j]);
        end
        for (int j = 0; j < NB; j++) begin
          x12[j] = srand(18); xb12[j] = srand(18); a12[j] = srand(bits - 2);
          xb[j] = word_t'(x12[j]); xbb[j] = word_t'(xb12[j]); ab[j] = word_t'(a12[j]);
        end
        ma = word_t'(srand(18)); mb = word_t'(srand(18));
        ea[n] = m_lin(x6, xb6, a6, longint'(ma));
        eb[n] = m_lin(x12, xb12, a12, longint'(mb));
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("saturated results: %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

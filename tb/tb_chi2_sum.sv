// tb_chi2_sum - self-checking test of the chi^2 sum of squares.
//
// Drives the eight chi inputs with directed corner cases (all zero, all at
// the most negative and most positive codes, a single non-zero component in
// each position) and then with random values of random magnitude, and
// compares chi2 with the sum of squares worked out in 64-bit arithmetic.
// The block is combinational, so each check is made one time step after the
// inputs change.
module tb_chi2_sum;
  import tf_pkg::*;

  localparam int N = 2 * N_CHI;

  word_t chi [N];
  logic [CHI2_W-1:0] chi2;
  int checks = 0, failures = 0;

  chi2_sum dut (.chi(chi), .chi2(chi2));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    longint e = 0;
    #1;
    foreach (chi[i]) e += longint'(chi[i]) * longint'(chi[i]);
    checks++;
    if (longint'(chi2) != e) begin
      failures++;
      $display("chi2 %0d expected %0d", chi2, e);
    end
  endtask

  initial begin
    foreach (chi[i]) chi[i] = '0;
    check();
    foreach (chi[i]) chi[i] = word_t'(-(2 ** (W - 1)));
    check();
    foreach (chi[i]) chi[i] = word_t'(2 ** (W - 1) - 1);
    check();
    for (int k = 0; k < N; k++) begin
      foreach (chi[i]) chi[i] = '0;
      chi[k] = word_t'(k + 3);
      check();
      chi[k] = word_t'(-(k + 1) * 1000);
      check();
    end
    for (int n = 0; n < 2000; n++) begin
      foreach (chi[i]) chi[i] = word_t'($signed($urandom) >>> $urandom_range(31, 14));
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

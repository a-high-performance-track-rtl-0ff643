// tb_phi_transform - streams random hits and pre-estimates (one per cycle)
// through the phi transformation and compares phi', 15 cycles later, with
// the reference model. Ranges are mostly physical (R 20-110 cm, |q/2rho| up
// to the 0.5 GeV limit), with some full-range values to reach saturation;
// about half of the hits are 2S disk hits so the strip correction is used.
module tb_phi_transform;
  import tf_pkg::*;
  import tf_model_pkg::*;
  localparam int LAT = 15, NV = 400, PITCH = 590;
  logic clk = 0;
  hit_t hit;
  word_t c, tn, rid, refr, refz, ir, phip;
  logic refok;
  longint exp_v [NV];
  int checks = 0, failures = 0, n_corr = 0;

  phi_transform dut (.clk(clk), .hit(hit), .c(c), .tan_th(tn), .r_ideal(rid),
    .ref_r(refr), .ref_z(refz), .ref_ok(refok), .inv_r2(ir), .phi_p(phip));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < NV + LAT; n++) begin
      @(negedge clk);
      if (n >= LAT && n - LAT < NV) begin
        checks++;
        if (longint'(phip) != exp_v[n-LAT]) begin
          failures++; $display("n=%0d phi'=%0d exp=%0d", n-LAT, phip, exp_v[n-LAT]);
        end
      end
      if (n < NV) begin
        bit wide, en;
        wide = (n % 8 == 7);
        hit = '0;
        hit.valid     = ($urandom_range(9) != 0);
        hit.two_s     = $urandom_range(1);
        hit.strip_off = SOFF_W'(srand(SOFF_W));
        hit.ring      = RING_W'($urandom);
        hit.r   = word_t'(wide ? srand(18) : 5000 + $urandom_range(23000));
        hit.phi = word_t'(srand(wide ? 18 : 16));
        hit.z   = word_t'(srand(wide ? 18 : 17));
        c    = word_t'(srand(wide ? 18 : 16));
        tn   = word_t'(srand(wide ? 18 : 14));
        rid  = word_t'(wide ? srand(18) : 5000 + $urandom_range(23000));
        refr = word_t'(5000 + $urandom_range(23000));
        refz = word_t'(srand(17));
        refok = ($urandom_range(4) != 0);
        ir   = word_t'(wide ? srand(18) : $urandom_range(80000));
        en = hit.valid && hit.two_s && refok;
        if (en) n_corr++;
        exp_v[n] = m_phi(hit.r, hit.phi, hit.z, c, tn, rid, refr, refz, en,
                         hit.strip_off, ir, PITCH);
      end
    end
    checks++;
    if (n_corr == 0) failures++;
    $display("hits with strip correction: %0d", n_corr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

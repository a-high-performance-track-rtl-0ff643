// tb_z_transform - streams random hits and pre-estimates through the z
// transformation and compares z', 15 cycles later, with the reference model.
module tb_z_transform;
  import tf_pkg::*;
  import tf_model_pkg::*;
  localparam int LAT = 15, NV = 400;
  logic clk = 0;
  hit_t hit;
  word_t c, ct, rid, zp;
  longint exp_v [NV];
  int checks = 0, failures = 0;

  z_transform dut (.clk(clk), .hit(hit), .c(c), .cot_th(ct), .r_ideal(rid), .z_p(zp));

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
        if (longint'(zp) != exp_v[n-LAT]) begin
          failures++; $display("n=%0d z'=%0d exp=%0d", n-LAT, zp, exp_v[n-LAT]);
        end
      end
      if (n < NV) begin
        bit wide;
        wide = (n % 8 == 7);
        hit = '0;
        hit.valid = 1;
        hit.r   = word_t'(wide ? srand(18) : 5000 + $urandom_range(23000));
        hit.phi = word_t'(srand(18));
        hit.z   = word_t'(srand(wide ? 18 : 17));
        c   = word_t'(srand(wide ? 18 : 16));
        ct  = word_t'(srand(wide ? 18 : 15));
        rid = word_t'(wide ? srand(18) : 5000 + $urandom_range(23000));
        exp_v[n] = m_z(hit.r, hit.z, c, ct, rid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

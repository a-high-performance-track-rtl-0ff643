// tb_pre_estimate - streams random hits and constant sets through the
// pre-estimate and compares q/2rho, tan theta and cot theta, 13 cycles
// later, with three linear fits of the reference model.
module tb_pre_estimate;
  import tf_pkg::*;
  import tf_model_pkg::*;
  localparam int LAT = 13, NV = 300;
  logic clk = 0;
  hit_t hits [N_LAYERS];
  word_t kc [K_PRE_C], kt [K_PRE_RZ], kk [K_PRE_RZ];
  word_t c, tn, ct;
  longint ec [NV], et [NV], ek [NV];
  int checks = 0, failures = 0;

  pre_estimate dut (.clk(clk), .hits(hits), .k_c(kc), .k_tan(kt), .k_cot(kk),
                    .c(c), .tan_th(tn), .cot_th(ct));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rz_fit(input hit_t h [N_LAYERS], input word_t k [K_PRE_RZ]);
    longint x[], xb[], a[];
    x = new[12]; xb = new[12]; a = new[12];
    for (int j = 0; j < 6; j++) begin
      x[j] = h[j].z;   xb[j] = k[12 + j]; a[j] = k[j];
      x[6+j] = h[j].r; xb[6+j] = k[18 + j]; a[6+j] = k[6 + j];
    end
    return m_lin(x, xb, a, k[24]);
  endfunction

  initial begin
    for (int n = 0; n < NV + LAT; n++) begin
      @(negedge clk);
      if (n >= LAT && n - LAT < NV) begin
        checks += 3;
        if (longint'(c)  != ec[n-LAT]) begin failures++; $display("c n=%0d %0d exp %0d", n-LAT, c, ec[n-LAT]); end
        if (longint'(tn) != et[n-LAT]) begin failures++; $display("tan n=%0d %0d exp %0d", n-LAT, tn, et[n-LAT]); end
        if (longint'(ct) != ek[n-LAT]) begin failures++; $display("cot n=%0d %0d exp %0d", n-LAT, ct, ek[n-LAT]); end
      end
      if (n < NV) begin
        longint x[], xb[], a[];
        x = new[6]; xb = new[6]; a = new[6];
        for (int j = 0; j < N_LAYERS; j++) begin
          hits[j] = '0;
          hits[j].valid = 1;
          hits[j].r   = word_t'(srand(18));
          hits[j].phi = word_t'(srand(18));
          hits[j].z   = word_t'(srand(18));
        end
        foreach (kc[i]) kc[i] = word_t'(srand(i < 6 ? 12 : 18));
        foreach (kt[i]) kt[i] = word_t'(srand(i < 12 ? 10 : 18));
        foreach (kk[i]) kk[i] = word_t'(srand(i < 12 ? 10 : 18));
        for (int j = 0; j < 6; j++) begin x[j] = hits[j].phi; xb[j] = kc[6+j]; a[j] = kc[j]; end
        ec[n] = m_lin(x, xb, a, kc[12]);
        et[n] = rz_fit(hits, kt);
        ek[n] = rz_fit(hits, kk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

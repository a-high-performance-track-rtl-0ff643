// tb_lin_fit - streams random transformed coordinates and 44-constant sets
// through the final fit and compares all six outputs, 11 cycles later, with
// the reference model (rows 0 and 1 with their central values, chi rows
// without).
module tb_lin_fit;
  import tf_pkg::*;
  import tf_model_pkg::*;
  localparam int LAT = 11, NV = 300;
  logic clk = 0;
  word_t x [N_LAYERS], k [K_FIT], y [N_LAYERS];
  longint e [NV][N_LAYERS];
  int checks = 0, failures = 0;

  lin_fit dut (.clk(clk), .x(x), .k(k), .y(y));

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
        for (int i = 0; i < N_LAYERS; i++) begin
          checks++;
          if (longint'(y[i]) != e[n-LAT][i]) begin
            failures++; $display("n=%0d row %0d y=%0d exp=%0d", n-LAT, i, y[i], e[n-LAT][i]);
          end
        end
      end
      if (n < NV) begin
        longint xv[], xb[], a[];
        xv = new[6]; xb = new[6]; a = new[6];
        foreach (x[j]) x[j] = word_t'(srand(18));
        foreach (k[i]) k[i] = word_t'(srand(i < 36 ? 13 : 18));
        for (int i = 0; i < N_LAYERS; i++) begin
          for (int j = 0; j < 6; j++) begin xv[j] = x[j]; xb[j] = k[36 + j]; a[j] = k[6*i + j]; end
          e[n][i] = m_lin(xv, xb, a, i == 0 ? longint'(k[42]) : i == 1 ? longint'(k[43]) : 0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

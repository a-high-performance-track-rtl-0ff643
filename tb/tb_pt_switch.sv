// tb_pt_switch - checks the registered low/high-pT decision against
// |c| < THRESH for random curvatures and for the edge values.
module tb_pt_switch;
  import tf_pkg::*;
  logic clk = 0;
  word_t c;
  logic hi;
  int checks = 0, failures = 0, n_hi = 0, n_lo = 0;
  localparam int TH = 4782;
  int vals [$];

  pt_switch dut (.clk(clk), .c(c), .hi_pt(hi));
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev;
    vals = '{0, TH-1, TH, TH+1, -TH+1, -TH, -TH-1, 131071, -131072, 1, -1};
    for (int n = 0; n < 200; n++) vals.push_back($urandom_range(0, 2*TH*2) - 2*TH);
    prev = 0;
    foreach (vals[n]) begin
      @(negedge clk);
      if (n > 0) begin
        bit e;
        e = ((prev < 0) ? -prev : prev) < TH;
        checks++;
        if (hi !== e) begin failures++; $display("c=%0d hi=%b exp=%b", prev, hi, e); end
        if (e) n_hi++; else n_lo++;
      end
      c = word_t'(vals[n]);
      prev = vals[n];
    end
    checks++;
    if (n_hi == 0 || n_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_const_addr - exhaustive check of the constant-set address over every
// region number and every hit-presence pattern.
module tb_const_addr;
  import tf_pkg::*;
  logic [REGION_W-1:0] region;
  logic [5:0] hv;
  logic [SET_W-1:0] set;
  logic ok;
  int checks = 0, failures = 0;

  const_addr dut (.region(region), .hit_valid(hv), .set(set), .ok(ok));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 16; r++) begin
      for (int m = 0; m < 64; m++) begin
        int nmiss, miss, eset;
        bit eok;
        region = REGION_W'(r);
        hv = 6'(m);
        #1;
        nmiss = 0; miss = -1;
        for (int k = 0; k < 6; k++) if (!m[k]) begin nmiss++; miss = k; end
        eok  = (nmiss <= 1) && (r < 14);
        eset = (nmiss == 0) ? r : r + 14 * (miss + 1);
        checks++;
        if (ok !== eok || (eok && int'(set) != eset)) begin
          failures++;
          $display("r=%0d m=%b ok=%b set=%0d exp ok=%b set=%0d", r, hv, ok, set, eok, eset);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ref_select - random hit patterns; the reference must be the outermost
// valid hit not flagged as a parallel-strip disk hit.
module tb_ref_select;
  import tf_pkg::*;
  hit_t hits [N_LAYERS];
  word_t rr, rz;
  logic ok;
  int checks = 0, failures = 0;

  ref_select dut (.hits(hits), .ref_r(rr), .ref_z(rz), .ok(ok));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      int er, ez; bit eok;
      er = 0; ez = 0; eok = 0;
      for (int j = 0; j < N_LAYERS; j++) begin
        hits[j] = hit_t'({$urandom, $urandom, $urandom});
        hits[j].valid = ($urandom_range(3) != 0);
        hits[j].two_s = ($urandom_range(2) == 0);
      end
      #1;
      // scan from the outermost slot inwards
      for (int j = N_LAYERS - 1; j >= 0; j--)
        if (!eok && hits[j].valid && !hits[j].two_s) begin
          eok = 1; er = int'(hits[j].r); ez = int'(hits[j].z);
        end
      checks++;
      if (ok !== eok || (eok && (int'(rr) != er || int'(rz) != ez))) begin
        failures++; $display("n=%0d ok=%b r=%0d z=%0d exp %b %0d %0d", n, ok, rr, rz, eok, er, ez);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

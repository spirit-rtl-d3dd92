// tb_logistic_lut: sweeps the dot product over and beyond [-8, 8) and
// compares the table output with 255/(1+exp(-z)) evaluated here (within the
// error of a 0.25-wide step), and checks monotonicity and saturation.
module tb_logistic_lut;
  import spirit_pkg::*;
  acc_t  z;
  prob_t p, prev;
  int checks = 0, failures = 0;

  logistic_lut dut (.z, .p);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prev = 0;
    for (int k = -12 * 64; k < 12 * 64; k++) begin
      real zr, e;
      z  = acc_t'(k * 64);          // step 1/64
      zr = real'(k) / 64.0;
      #1;
      e  = 255.0 / (1.0 + $exp(-zr));
      // slope of 255*sigmoid is at most 64/unit: 0.125 offset -> <= 8 + rounding
      check($itor(p) - e < 9.0 && e - $itor(p) < 9.0, $sformatf("z=%f p=%0d exp %f", zr, p, e));
      check(p >= prev, "monotonic");
      prev = p;
    end
    z = acc_t'(-64'sd1 <<< 38); #1; check(p == 0, "large negative saturates to 0");
    z = acc_t'((64'sd1 <<< 38) - 1); #1; check(p == 255, "large positive saturates to 255");
    z = 0; #1; check(p == 135, "z = 0 gives centre entry");
    z = -1; #1; check(p == 120, "z just below 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

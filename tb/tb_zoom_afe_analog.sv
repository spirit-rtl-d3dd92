// tb_zoom_afe_analog: checks the analog core model: SAR comparison of the
// held input against DAC levels, the integrator slope in incremental mode,
// the integrator reset, and the two tracking comparators firing after the
// integrator passes +/- 3 LSB.
module tb_zoom_afe_analog;
  localparam real LSB = 0.35 / 128.0;
  logic clk = 0;
  real  vin = 0.0;
  logic sample = 0, sar_mode = 1, int_rst = 0;
  logic [6:0] dac_code = 7'd64;
  logic cmp, cmp_up, cmp_dn;
  int checks = 0, failures = 0;

  zoom_afe_analog dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Hold 10.3 LSB above mid-scale, then move vin away: the held value counts.
    vin = 10.3 * LSB; sample = 1;
    @(negedge clk); @(posedge clk); sample = 0; vin = -50 * LSB;
    for (int c = 60; c < 80; c++) begin
      dac_code = 7'(c);
      @(posedge clk);
      check(cmp == (c <= 74), $sformatf("sar compare code %0d", c));
    end
    // Incremental mode: input 1 LSB above DAC level, integrator rises 1 LSB/cycle.
    int_rst = 1; sar_mode = 0; vin = 1.0 * LSB; dac_code = 7'd64;
    @(posedge clk); int_rst = 0;
    for (int k = 1; k <= 6; k++) begin
      @(posedge clk);
      check(cmp == 1'b1, "integrator sign positive");
      check(cmp_up == (k > 3), $sformatf("cmp_up after %0d cycles", k));
      check(cmp_dn == 1'b0, "cmp_dn idle");
    end
    // Reverse: DAC 2 LSB above input, integrator falls 1 LSB/cycle from 6.
    dac_code = 7'd66;
    for (int k = 1; k <= 12; k++) begin
      @(posedge clk);
      // (exact boundaries 0 and -3 LSB are skipped: real rounding decides them)
      if (k != 6) check(cmp == (6 - k > 0), $sformatf("sign at step %0d", k));
      if (k != 9) check(cmp_dn == (6 - k < -3), $sformatf("cmp_dn at step %0d", k));
    end
    int_rst = 1; @(posedge clk); int_rst = 0;
    check(cmp == 1'b1 && !cmp_up && !cmp_dn, "reset clears integrator");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

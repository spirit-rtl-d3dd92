// tb_zoom_adc_ctrl: runs the Zoom ADC controller against the analog core
// model. Static inputs across the full scale must convert to within 0.05 LSB
// of the input; a ramp that moves about 6 LSB during one conversion must
// take reference steps (tracking) and still convert to the mean input over
// the incremental window. The conversion period must be 1 + 7 + N_INC cycles.
module tb_zoom_adc_ctrl;
  localparam int  N_INC = 248;
  localparam real LSB   = 0.35 / 128.0;
  logic clk = 0, rst_n = 0;
  real  vin = 0.0;
  logic sample, sar_mode, int_rst, cmp, cmp_up, cmp_dn, dout_valid, track_evt;
  logic [6:0] dac_code;
  logic signed [15:0] dout;
  int checks = 0, failures = 0, tracks = 0;
  real vsum = 0.0, vlast = 0.0;
  real vmean;
  real slope = 0.0;
  longint cyc = 0, last_valid = -1;

  zoom_afe_analog afe (.*);
  zoom_adc_ctrl #(.N_INC(N_INC)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (track_evt) tracks++;
  end
  // Mirror of what the integrator sees: vin at each falling edge in INC.
  always @(negedge clk) begin
    if (sample) begin vlast = vsum; vsum = 0.0; end
    else if (!sar_mode) vsum = vsum + vin;
    vin = vin + slope;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic convert(output real est, output real mean);
    @(posedge clk iff dout_valid);
    @(negedge clk);
    est  = real'(dout) * LSB / real'(N_INC);
    #1 mean = vlast / real'(N_INC);
    if (last_valid >= 0) check(cyc - last_valid == 1 + 7 + N_INC, "conversion period");
    last_valid = cyc;
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real est, mean;
    int t0;
    static real vals[8] = '{0.0, 0.0123, -0.0456, 0.1701, -0.1733, 0.001, 0.09, -0.0999};
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (vals[i]) begin
      vin = vals[i];
      convert(est, mean);     // conversion that started before this value
      t0 = tracks;
      convert(est, mean);
      check(tracks == t0, "no tracking for a static input");
      check((est - vals[i]) < 0.05 * LSB && (vals[i] - est) < 0.05 * LSB,
            $sformatf("static %f -> %f", vals[i], est));
    end
    // Ramp: 6 LSB per conversion.
    vin = -0.1; slope = 6.0 * LSB / 256.0;
    for (int k = 0; k < 10; k++) begin
      convert(est, mean);
      if (k > 0) check((est - mean) < 0.05 * LSB && (mean - est) < 0.05 * LSB,
                       $sformatf("ramp mean %f -> %f", mean, est));
    end
    check(tracks > 20, $sformatf("tracking steps taken: %0d", tracks));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

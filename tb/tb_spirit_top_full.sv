// tb_spirit_top_full: the whole chip at its real size and clock ratio (no
// parameter overrides): 1.024 MHz AFE clock, 256-cycle Zoom conversions, CIC
// ratio 4 (1 kHz samples) and the classifier at 24 kHz, i.e. exactly 24
// classifier cycles per sample. About 0.3 s of EEG is simulated:
//   - step artifacts make the ADC tracking loop work;
//   - channel offsets must reach the sample stream in order and to scale
//     (4 mV is about 363 counts with 248 incremental cycles);
//   - every sample gets one detector and one predictor decision even with no
//     spare classifier cycle, and the detector self-trains while quiet;
//   - a 40 Hz tone is detected through a gamma-band weight (seizure onset,
//     reported as a false negative since nothing was predicted);
//   - a prediction is produced through the predictor bias.
// Minute-scale mechanisms (history snapshots, the 30-minute check) need far
// longer runs and are covered by the shortened end-to-end test.
module tb_spirit_top_full;
  import spirit_pkg::*;

  logic clk_afe = 0, clk_cls = 0, rst_n = 0;
  real  vin [N_CH];
  logic        reg_we = 0;
  logic [7:0]  reg_addr = 0;
  logic [15:0] reg_wdata = 0, reg_rdata;
  logic det_valid, det_label, pred_valid, pred_label, seizure, seizure_onset;
  logic prediction, tp, fp, fn, det_sgd_pass, pred_sgd_pass, hist_store, pred_retrain;
  logic [5:0] pred_time_min;
  logic [N_CH-1:0] afe_track_evt;

  spirit_top dut (.*);

  // 1024 AFE cycles = 24 classifier cycles per sample (6144 time units)
  always #3   clk_afe = ~clk_afe;
  always #128 clk_cls = ~clk_cls;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  int n_track, n_det_sgd, n_pred, n_onset, n_fn, n_samples, n_det, n_predv;
  always @(posedge clk_afe) if (rst_n) n_track += $countones(afe_track_evt);
  always @(posedge clk_cls) if (rst_n) begin
    n_det_sgd += int'(det_sgd_pass);
    n_pred    += int'(prediction);
    n_onset   += int'(seizure_onset);
    n_fn      += int'(fn);
    n_samples += int'(dut.samples_valid);
    n_det     += int'(det_valid);
    n_predv   += int'(pred_valid);
  end

  // signal time: one sample (6144 units) = 1 ms
  bit  artifacts = 1'b1;
  real tone_amp = 0.0, step_v = 0.0;
  real noise [N_CH];
  always #1536 foreach (noise[c]) noise[c] = 0.2e-3 * ($itor($urandom_range(2000)) / 1000.0 - 1.0);
  always #9_777 step_v = (artifacts && $urandom_range(1) == 0) ? 0.010 * (($urandom_range(1) == 1) ? 1.0 : -1.0) : 0.0;
  always #200 begin
    real ts;
    ts = $realtime / 6144.0 * 1.0e-3;
    foreach (vin[c])
      vin[c] = (c - 3.5) * 0.004 + noise[c] + step_v
             + tone_amp * $sin(2.0 * 3.14159265 * 40.0 * ts + c);
  end

  task automatic wr(logic [7:0] a, logic [15:0] d);
    @(negedge clk_cls); reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk_cls); reg_we = 0;
  endtask
  task automatic rd(logic [7:0] a, output logic [15:0] d);
    @(negedge clk_cls); reg_addr = a; #1 d = reg_rdata;
  endtask
  task automatic wait_samples(int n);
    repeat (n) @(posedge dut.samples_valid);
  endtask

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] d;
    int s_on;
    foreach (vin[c]) vin[c] = 0.0;
    repeat (4) @(posedge clk_cls);
    rst_n = 1;
    wr(8'h01, 16'(-10240));           // detector bias -2.5: confident "no"
    wr(8'h02, 16'(-10240));
    wr(8'h08, 16'h0A08);
    wr(8'h09, 16'd20);
    wr(8'h00, 16'h0009);              // detector training on, CIC ratio 4

    wait_samples(20);
    artifacts = 1'b0;
    wait_samples(20);
    begin
      logic signed [15:0] s [N_CH];
      bit ordered;
      ordered = 1;
      foreach (s[c]) s[c] = dut.samples[c];
      for (int c = 1; c < N_CH; c++) if (s[c] <= s[c-1]) ordered = 0;
      check(ordered, "channel offsets appear in order at the sample stream");
      check(s[7] - s[0] > 7 * 300 && s[7] - s[0] < 7 * 430,
            $sformatf("sample scale: ch7 - ch0 = %0d", s[7] - s[0]));
    end
    wait_samples(100);
    check(n_track > 0, $sformatf("ADC tracking steps: %0d", n_track));
    check(n_det_sgd > 0, $sformatf("detector self-training passes: %0d", n_det_sgd));
    rd(8'h40, d);
    check($signed(d) < 0, "detector weight moved towards label 0");

    wait_samples(100);                // the artifacts' filter ringing leaves the window
    // detector by hand: gamma-band weights
    wr(8'h00, 16'h0008);
    for (int c = 0; c < N_CH; c++)
      for (int f = 0; f < N_DET_F; f++) wr(8'(64 + c * N_DET_F + f), (f == 4) ? 16'd1 : 16'd0);
    wr(8'h01, 16'(-6 * 4096));
    wait_samples(20);
    check(n_onset == 0 && !seizure, "quiet EEG is not a seizure");
    tone_amp = 0.020;
    s_on = n_samples;
    wait (n_onset > 0 || n_samples > s_on + 100);
    check(n_onset == 1, $sformatf("seizure detected %0d samples after it began", n_samples - s_on));
    wait_samples(2);
    check(n_fn == 1, "unpredicted seizure reported as a false negative");
    tone_amp = 0.0;

    wr(8'h02, 16'(6 * 4096));
    wait_samples(30);
    check(n_pred == 1, "prediction issued after the accumulator threshold");
    wr(8'h02, 16'(-10240));
    wait_samples(10);

    check(n_det + n_det_sgd >= n_samples - 2 && n_det + n_det_sgd <= n_samples,
          $sformatf("one detector pass per sample (%0d + %0d / %0d)", n_det, n_det_sgd, n_samples));
    check(n_predv >= n_samples - 2 && n_predv <= n_samples,
          $sformatf("one predictor decision per sample (%0d / %0d)", n_predv, n_samples));
    $display("mechanisms: samples=%0d track=%0d det_sgd=%0d onset=%0d fn=%0d predict=%0d",
             n_samples, n_track, n_det_sgd, n_onset, n_fn, n_pred);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_spirit_top: end-to-end test of the whole chip with a shortened time
// scale (56 incremental cycles per conversion, a "minute" of 10 samples, the
// 30-minute window and the 100-sample feature window unchanged).
//
// Eight electrode voltages (channel offsets, random noise, step artifacts and
// a 40 Hz "ictal" tone) drive the AFE models. The register bus configures the
// chip and steers the classifiers through their biases, giving this story:
//   1. quiet EEG: the detector is confident "no seizure" and self-trains
//      (high-confidence label 0); one-minute snapshots fill the history;
//   2. a seizure with no prediction -> false negative -> predictor retrained
//      with label 1 over the stored history;
//   3. the predictor fires, a seizure follows within the window -> true
//      positive with its prediction time;
//   4. the predictor fires again, no seizure for 30 minutes -> false
//      positive -> predictor retrained with label 0.
// Every mechanism (ADC tracking, detector SGD, predictor SGD, history store,
// prediction, onset, TP, FP, FN, retraining) is counted; one that never
// happened counts as a failure. Sample ordering, features, weight updates
// (read back over the bus), the status counters and the prediction time are
// checked as well.
module tb_spirit_top;
  import spirit_pkg::*;
  localparam int SPM = 10;
  localparam int WIN_SAMPLES = 100;
  localparam int HIST = 30;

  logic clk_afe = 0, clk_cls = 0, rst_n = 0;
  real  vin [N_CH];
  logic        reg_we = 0;
  logic [7:0]  reg_addr = 0;
  logic [15:0] reg_wdata = 0, reg_rdata;
  logic det_valid, det_label, pred_valid, pred_label, seizure, seizure_onset;
  logic prediction, tp, fp, fn, det_sgd_pass, pred_sgd_pass, hist_store, pred_retrain;
  logic [5:0] pred_time_min;
  logic [N_CH-1:0] afe_track_evt;

  spirit_top #(.N_INC(56), .SAMPLES_PER_MIN(SPM)) dut (.*);

  always #5  clk_afe = ~clk_afe;     // 64-cycle conversions x 4 = 2.56 us per sample
  always #40 clk_cls = ~clk_cls;     // 32 classifier cycles per sample

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_track, n_det_sgd, n_pred_sgd, n_store, n_pred, n_onset, n_tp, n_fp, n_fn;
  int n_retrain, n_samples, n_det, n_predv;
  int s_pred, s_tp;                  // sample index of the last prediction / TP
  always @(posedge clk_afe) if (rst_n) n_track += $countones(afe_track_evt);
  always @(posedge clk_cls) if (rst_n) begin
    n_det_sgd  += int'(det_sgd_pass);
    n_pred_sgd += int'(pred_sgd_pass);
    n_store    += int'(hist_store);
    n_pred     += int'(prediction);
    n_onset    += int'(seizure_onset);
    n_tp       += int'(tp);
    if (prediction) s_pred = n_samples;
    if (tp)         s_tp   = n_samples;
    n_fp       += int'(fp);
    n_fn       += int'(fn);
    n_retrain  += int'(pred_retrain);
    n_samples  += int'(dut.samples_valid);
    n_det      += int'(det_valid);
    n_predv    += int'(pred_valid);
  end

  // ---------------- electrode signals ----------------
  bit  artifacts = 1'b1;
  real noise_amp = 0.5e-3, tone_amp = 0.0, step_v = 0.0;
  real noise [N_CH];
  always #640 foreach (noise[c]) noise[c] = noise_amp * ($itor($urandom_range(2000)) / 1000.0 - 1.0);
  always #17_330 step_v = (artifacts && $urandom_range(3) == 0) ? 0.010 * (($urandom_range(1) == 1) ? 1.0 : -1.0) : 0.0;
  always #100 begin
    real ts;
    ts = $realtime / 2560.0 * 1.0e-3;         // signal time: one sample = 1 ms
    foreach (vin[c])
      vin[c] = (c - 3.5) * 0.004 + noise[c] + step_v
             + tone_amp * $sin(2.0 * 3.14159265 * 40.0 * ts + c);
  end

  // ---------------- bus helpers ----------------
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

  localparam logic [15:0] BIAS_LOW  = 16'(-10240);   // -2.5: p ~ 0.08
  localparam logic [15:0] BIAS_HIGH = 16'(6 * 4096);  // +6:   p ~ 1

  initial begin
    logic [15:0] d, w_det0, w_pred0;
    int          ll_quiet, ll_ictal, s0, fn0;
    ll_ictal = 0;
    foreach (vin[c]) vin[c] = 0.0;
    repeat (4) @(posedge clk_cls);
    rst_n = 1;
    wr(8'h01, BIAS_LOW);              // detector bias
    wr(8'h02, BIAS_LOW);              // predictor bias
    wr(8'h08, 16'h0A08);              // learning-rate shifts
    wr(8'h09, 16'd20);                // prediction accumulator threshold
    wr(8'h00, 16'h000B);              // both trainings on, CIC ratio 4

    // ---- 1. quiet EEG ----
    wait_samples(20);
    artifacts = 1'b0;                 // step artifacts only at the start
    wait_samples(20);
    begin
      logic signed [15:0] s [N_CH];
      bit ordered;
      ordered = 1;
      foreach (s[c]) s[c] = dut.samples[c];
      for (int c = 1; c < N_CH; c++) if (s[c] <= s[c-1]) ordered = 0;
      check(ordered, "channel offsets appear in order at the sample stream");
      // 4 mV per channel step is about 82 counts with 56 incremental cycles
      check(s[7] - s[0] > 7 * 60 && s[7] - s[0] < 7 * 110,
            $sformatf("sample scale: ch7 - ch0 = %0d", s[7] - s[0]));
    end
    wait_samples(80);
    ll_quiet = int'(dut.feat_snap[0].ll);
    check(ll_quiet > 0, "line length of noise is nonzero");
    check(dut.feat_snap[0].bp[0] + dut.feat_snap[0].bp[3] > 0, "band power of noise is nonzero");
    rd(8'h40, w_det0);
    check(n_det_sgd > 0 && $signed(w_det0) < 0,
          $sformatf("detector self-trained towards label 0 (w=%0d)", $signed(w_det0)));
    rd(8'h80, w_pred0);
    check(w_pred0 == 0, "predictor untouched before any retraining");

    wait_samples(WIN_SAMPLES);        // the artifacts' filter ringing leaves the window
    // The host now freezes the detector and programs it by hand: a small
    // weight on each channel's gamma band power, so the 40 Hz tone is what
    // makes it fire.
    wr(8'h00, 16'h000A);              // detector training off, predictor on
    for (int c = 0; c < N_CH; c++)
      for (int f = 0; f < N_DET_F; f++) wr(8'(64 + c * N_DET_F + f), (f == 4) ? 16'd1 : 16'd0);
    wr(8'h01, 16'(-4 * 4096));

    // ---- 2. seizure without prediction: false negative ----
    // Start right after a history snapshot so that the retraining, which
    // follows the onset, sees only quiet snapshots.
    wait_samples(WIN_SAMPLES + 20);   // artifacts leave the feature window
    check(!seizure && n_onset == 0, "no detection on quiet EEG");
    @(posedge hist_store);
    fn0 = n_fn;
    tone_amp = 0.020;
    wait_samples(30);
    ll_ictal = int'(dut.feat_snap[0].ll);
    check(ll_ictal > 2 * ll_quiet, $sformatf("ictal line length %0d vs quiet %0d", ll_ictal, ll_quiet));
    check(seizure, "smoothed detector reports the seizure");
    check(n_onset == 1, "one onset for the seizure");
    check(n_fn == fn0 + 1, "false negative reported");
    tone_amp = 0.0;
    wr(8'h09, 16'd1000);              // hold predictions while the host inspects
    wait_samples(HIST + 4);           // retraining over the history is done
    rd(8'h80, d);
    check(n_pred_sgd > 0 && $signed(d) > $signed(w_pred0),
          $sformatf("predictor retrained towards label 1 after the FN (w %0d -> %0d)", $signed(w_pred0), $signed(d)));
    // back to a clean predictor for the rest of the story
    for (int i = 0; i < N_CH * N_PRED_F; i++) wr(8'(8'h80 + i), 16'd0);
    wait_samples(WIN_SAMPLES + 20);   // let the seizure leave the 100-sample window
    check(!seizure, "seizure over");
    wr(8'h09, 16'd20);

    // ---- 3. prediction then seizure: true positive ----
    wr(8'h02, BIAS_HIGH);
    s0 = n_pred;
    wait (n_pred > s0);
    wr(8'h02, BIAS_LOW);
    wait_samples(4 * SPM);            // four minutes later
    tone_amp = 0.020;
    wait_samples(40);
    check(n_tp == 1, "true positive reported");
    check(n_onset == 2, "second onset");
    rd(8'h0A, d);
    check(int'(d) == (s_tp - s_pred) / SPM,
          $sformatf("prediction time %0d minutes (samples %0d..%0d)", d, s_pred, s_tp));
    tone_amp = 0.0;
    wait_samples(WIN_SAMPLES + 20);
    check(!seizure, "second seizure over");

    // ---- 4. prediction without seizure: false positive ----
    rd(8'h80, w_pred0);
    wr(8'h02, BIAS_HIGH);
    s0 = n_pred;
    wait (n_pred > s0);
    wr(8'h02, BIAS_LOW);
    wait_samples(2);
    rd(8'h10, d);
    check(d[0] && !d[1], "status: window open, no seizure");
    rd(8'h0E, d);
    check(d[15:8] < 8'd128 && d[7:0] < 8'd128, $sformatf("status: both probabilities low (%h)", d));
    wait_samples(30 * SPM + 18);
    rd(8'h10, d);
    check(!d[0], "status: window closed");
    check(n_fp == 1, "false positive reported after the 30-minute window");
    rd(8'h80, d);
    check($signed(d) < $signed(w_pred0),
          $sformatf("predictor retrained towards label 0 after the FP (w %0d -> %0d)", $signed(w_pred0), $signed(d)));
    wait_samples(40);

    // ---- status registers and totals ----
    rd(8'h0B, d); check(d == 16'(n_tp), "TP counter register");
    rd(8'h0C, d); check(d == 16'(n_fp), "FP counter register");
    rd(8'h0D, d); check(d == 16'(n_fn), "FN counter register");
    // a training pass takes the place of one classification
    check(n_det + n_det_sgd >= n_samples - 2 && n_det + n_det_sgd <= n_samples,
          $sformatf("one detector pass per sample (%0d + %0d / %0d)", n_det, n_det_sgd, n_samples));
    check(n_predv + n_pred_sgd >= n_samples - 2 && n_predv + n_pred_sgd <= n_samples,
          $sformatf("one predictor pass per sample (%0d + %0d / %0d)", n_predv, n_pred_sgd, n_samples));
    // snapshots due during a retraining run are merged into one
    check(n_store >= n_samples / SPM - 2 * (HIST + 1) / SPM - 2 && n_store <= n_samples / SPM + 1,
          $sformatf("one history snapshot per minute (%0d)", n_store));

    $display("mechanisms: samples=%0d track=%0d det_sgd=%0d pred_sgd=%0d store=%0d predict=%0d onset=%0d tp=%0d fp=%0d fn=%0d retrain=%0d",
             n_samples, n_track, n_det_sgd, n_pred_sgd, n_store, n_pred, n_onset, n_tp, n_fp, n_fn, n_retrain);
    check(n_track   > 0, "ADC tracking happened");
    check(n_det_sgd > 0, "detector SGD happened");
    check(n_pred_sgd > 0, "predictor SGD happened");
    check(n_store   > 0, "history store happened");
    check(n_pred    > 0, "prediction happened");
    check(n_onset   > 0, "seizure onset happened");
    check(n_tp      > 0, "true positive happened");
    check(n_fp      > 0, "false positive happened");
    check(n_fn      > 0, "false negative happened");
    check(n_retrain > 0, "retraining request happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_spirit_classifier: runs 300 passes of the shared classifier with random
// features and weights against a reference model written here (dot
// products, logistic table from the formula, thresholds, high-confidence
// self-labelling, SGD updates with saturation, 1-minute history stores and
// predictor retraining over the stored entries with their stored
// probabilities). Checks every detector and predictor output, which passes
// are SGD passes, all 120 weights at the end, and that back-to-back passes
// give one detector and one predictor result every 24 cycles.
module tb_spirit_classifier;
  import spirit_pkg::*;
  localparam int DEPTH = 30;
  logic clk = 0, rst_n = 0, start = 0;
  cfg_t cfg;
  logic [4:0] slot;
  feat_t [4:0] x;
  logic minute_tick = 0, retrain_req = 0, retrain_label = 0;
  logic w_we = 0, w_sel = 0;
  logic [6:0] w_idx = 0;
  wgt_t w_wdata = 0, w_rdata;
  logic det_valid, det_label, pred_valid, pred_label, busy;
  logic det_sgd_pass, pred_sgd_pass, hist_store;
  prob_t det_prob, pred_prob;
  int checks = 0, failures = 0;

  spirit_classifier dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- reference model ----------------
  longint wd [8][5], wpm [8][10];
  feat_t [4:0] xs [24];                 // this pass's features by slot
  feat_t [4:0] dhist [8];
  feat_t [4:0] hx [DEPTH][16];
  longint hp [DEPTH];
  int h_count = 0, h_wp = 0;
  bit det_pend = 0, det_lab = 0; longint det_plast = 0;
  int pred_left = 0, pred_entry = 0; bit pred_lab = 0;
  bit store_pend = 0;
  int run_hi = 0, run_lo = 0;

  assign x = xs[slot];

  function automatic longint lut(longint z);
    longint i = z >>> 10;
    if (i < -32) i = -32;
    if (i > 31) i = 31;
    return $rtoi(255.0 / (1.0 + $exp(-(real'(i) * 0.25 + 0.125))) + 0.5);
  endfunction
  function automatic longint sgd(longint w, longint p, int sh);
    longint v = w - (p >>> sh);
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return v;
  endfunction

  // expected results of the current pass
  bit exp_det_out, exp_pred_out; longint exp_dp, exp_pp;
  int got_det, got_pred, got_dsgd, got_psgd;
  bit b2b_g = 0;
  realtime last_dv = 0, last_pv = 0;

  always @(posedge clk) if (rst_n) begin
    if (det_valid) begin
      got_det++;
      if (b2b_g && last_dv > 0) check(int'($realtime - last_dv) % 240 == 0, "detector results on the 24-cycle grid");
      last_dv = $realtime;
      check(exp_det_out, "detector output only in classification passes");
      check(det_prob == exp_dp, $sformatf("det prob %0d exp %0d", det_prob, exp_dp));
      check(det_label == (exp_dp >= cfg.det_thr), "det label");
    end
    if (pred_valid) begin
      got_pred++;
      if (b2b_g && last_pv > 0) check($realtime - last_pv == 240, "one predictor result per 24 cycles");
      last_pv = $realtime;
      check(exp_pred_out, "predictor output only in classification passes");
      check(pred_prob == exp_pp, $sformatf("pred prob %0d exp %0d", pred_prob, exp_pp));
      check(pred_label == (exp_pp >= cfg.pred_thr), "pred label");
    end
    if (det_sgd_pass) got_dsgd++;
    if (pred_sgd_pass) got_psgd++;
  end

  task automatic model_pass();
    bit dm, pm, sn;
    longint z;
    dm = det_pend; pm = (pred_left != 0);
    sn = store_pend && !pm;
    if (sn) store_pend = 0;
    // detector phase
    if (!dm) begin
      z = cfg.det_bias;
      for (int c = 0; c < 8; c++) begin
        for (int l = 0; l < 5; l++) z += wd[c][l] * longint'(xs[c][l]);
        dhist[c] = xs[c];
      end
      exp_det_out = 1; exp_dp = lut(z);
      // high-confidence labelling
      run_hi = (exp_dp >= cfg.hc_hi) ? run_hi + 1 : 0;
      run_lo = (exp_dp <= cfg.hc_lo) ? run_lo + 1 : 0;
      if (exp_dp >= cfg.hc_hi && run_hi >= cfg.hc_cnt) begin
        run_hi = 0; det_pend = 1; det_lab = 1; det_plast = exp_dp;
      end else if (exp_dp <= cfg.hc_lo && run_lo >= cfg.hc_cnt) begin
        run_lo = 0; det_pend = 1; det_lab = 0; det_plast = exp_dp;
      end
    end else begin
      longint e = det_plast - (det_lab ? 255 : 0);
      exp_det_out = 0;
      for (int c = 0; c < 8; c++)
        for (int l = 0; l < 5; l++)
          wd[c][l] = sgd(wd[c][l], e * longint'(dhist[c][l]), cfg.det_lr_shift);
      det_pend = 0;
    end
    // predictor phases
    if (!pm) begin
      z = cfg.pred_bias;
      for (int s = 8; s < 24; s++)
        for (int l = 0; l < 5; l++)
          z += wpm[s % 8][l + 5 * (s / 8 - 1)] * longint'(xs[s][l]);
      exp_pred_out = 1; exp_pp = lut(z);
      if (sn) begin
        for (int s = 8; s < 24; s++) hx[h_wp][s - 8] = xs[s];
        hp[h_wp] = exp_pp;
        h_wp = (h_wp + 1) % DEPTH;
        if (h_count < DEPTH) h_count++;
      end
    end else begin
      longint e = hp[pred_entry] - (pred_lab ? 255 : 0);
      exp_pred_out = 0;
      for (int s = 8; s < 24; s++)
        for (int l = 0; l < 5; l++)
          wpm[s % 8][l + 5 * (s / 8 - 1)] = sgd(wpm[s % 8][l + 5 * (s / 8 - 1)],
                                              e * longint'(hx[pred_entry][s - 8][l]), cfg.pred_lr_shift);
      pred_left--;
      pred_entry = (pred_entry + 1) % DEPTH;
    end
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_dsgd, n_psgd, n_store;
    n_dsgd = 0; n_psgd = 0; n_store = 0;
    cfg = '0;
    cfg.det_train_en = 1; cfg.pred_train_en = 1;
    cfg.det_bias = -16'sd1000; cfg.pred_bias = 16'sd500;
    cfg.det_thr = 8'd128; cfg.pred_thr = 8'd100;
    cfg.hc_hi = 8'd200; cfg.hc_lo = 8'd40; cfg.hc_cnt = 8'd2;
    cfg.det_lr_shift = 4'd3; cfg.pred_lr_shift = 4'd4;
    foreach (xs[i]) xs[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // load random weights
    for (int i = 0; i < 120; i++) begin
      @(negedge clk);
      w_we = 1; w_sel = (i >= 40); w_idx = 7'(i >= 40 ? i - 40 : i);
      w_wdata = wgt_t'($urandom_range(0, 40) - 20);
      if (i < 40) wd[i / 5][i % 5] = longint'(w_wdata);
      else        wpm[(i - 40) / 10][(i - 40) % 10] = longint'(w_wdata);
    end
    @(negedge clk); w_we = 0;
    for (int n = 0; n < 300; n++) begin
      bit b2b;
      b2b = (n >= 270);
      // stretches of confident detector output make the self-labelling fire
      // whatever the random weights do
      if (n >= 100 && n < 130)      cfg.det_bias = -16'sd32000;
      else if (n >= 150 && n < 180) cfg.det_bias = 16'sd32000;
      else                          cfg.det_bias = -16'sd1000;
      b2b_g = (n >= 272);
      for (int s = 0; s < 24; s++)
        for (int l = 0; l < 5; l++) xs[s][l] = feat_t'($urandom_range(0, 100));
      got_det = 0; got_pred = 0; got_dsgd = 0; got_psgd = 0;
      model_pass();
      if (!exp_det_out) n_dsgd++;
      if (!exp_pred_out) n_psgd++;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      repeat (b2b ? 22 : 30) @(negedge clk);
      if (!b2b) begin
        check(got_det == int'(exp_det_out) && got_pred == int'(exp_pred_out),
              $sformatf("pass %0d: one result per classification pass", n));
        check(got_dsgd == int'(!exp_det_out) && got_psgd == int'(!exp_pred_out),
              $sformatf("pass %0d: SGD pass flags", n));
      end else if (n > 271) begin
        check(got_det == int'(exp_det_out) || !exp_det_out, "back-to-back detector rate");
        check(got_pred <= 1, "back-to-back predictor rate");
      end
      // requests between passes
      if (n % 7 == 3 && !b2b) begin
        @(negedge clk); minute_tick = 1; store_pend = 1; n_store++;
        @(negedge clk); minute_tick = 0;
      end
      if (n == 60 || n == 150 || n == 230) begin
        @(negedge clk);
        retrain_req = 1; retrain_label = (n != 150);
        if (h_count > 0 && pred_left == 0) begin
          pred_left = h_count; pred_entry = 0; pred_lab = retrain_label;
        end
        @(negedge clk); retrain_req = 0;
      end
    end
    repeat (40) @(negedge clk);
    check(n_dsgd > 5 && n_psgd > 20, $sformatf("SGD passes seen: det %0d pred %0d", n_dsgd, n_psgd));
    for (int i = 0; i < 120; i++) begin
      w_sel = (i >= 40); w_idx = 7'(i >= 40 ? i - 40 : i);
      #1;
      check(longint'(w_rdata) == (i < 40 ? wd[i / 5][i % 5] : wpm[(i - 40) / 10][(i - 40) % 10]),
            $sformatf("weight %0d: %0d", i, w_rdata));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// spirit_classifier: the shared detector / predictor logistic-regression
// datapath with on-chip SGD retraining.
//
// Both classifiers compute p = logistic(w . x + bias) and are retrained with
// the SGD step  w <- w - eta * (p - y) * x.  One set of five array
// multipliers serves all of it. A pass over one sample takes 24 slots
// (slot = 8*phase + channel), five features per slot:
//   phase 0      detector   : 8 channels x 5 features (w_det[ch][0..4])
//   phases 1, 2  predictor  : 8 channels x 10 features (w_pred[ch][0..9])
// In classification mode lane l multiplies weight by feature and the lane
// sum is accumulated over the phase group; the LUT then gives the
// probability, compared with a programmed threshold for the binary label.
// In SGD mode the same multipliers form err * x, err = p - 255*y, and each
// weight is decreased by (err * x) >>> lr_shift with saturation.
//
// The mode is chosen per pass and per classifier, so detector and predictor
// retrain independently:
//   - Detector: hc_labeler watches the detector probabilities; when it asks
//     for training, the next pass runs phase 0 in SGD mode on the features
//     and probability of the sample that completed the confident run (kept
//     here in det_hist). That pass produces no detector output.
//   - Predictor: on a retrain request (from the prediction check, with its
//     label) the predictor phases of the following passes run in SGD mode,
//     one stored history entry per pass, over all entries of
//     feature_history, using the stored features and probability. Those
//     passes produce no predictor output.
// Once a minute (`minute_tick`) a classification pass copies its predictor
// features and, once known, its probability into feature_history.
//
// Timing: `start` begins a pass (one per 1 kHz sample at the 24 kHz clock).
// The detector result (det_valid pulse) comes 9 cycles after the pass starts
// (during slot 8), the predictor result (pred_valid pulse) 25 cycles after,
// which is slot 0 of the next pass. The logistic LUT is shared by both.
//
// From the paper: shared multipliers for dot products and SGD, LUT logistic
// function, thresholding, weights in registers, independent retraining,
// predictor retraining from the stored 1-minute snapshots and probabilities.
// Own choices: fixed-point formats, the bias (programmed, not retrained),
// one retraining pass taking the place of one classification, and the
// learning rate as a right shift.
//
// Weights are loaded (offline-trained values) and read back through the
// w_* port: w_sel 0 = detector index ch*5+f, 1 = predictor index ch*10+f.
module spirit_classifier
  import spirit_pkg::*;
#(
  parameter int N_CH      = 8,
  parameter int HIST_DEPTH = 30
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  cfg_t                        cfg,
  input  logic                        start,
  output logic [$clog2(3*N_CH)-1:0]   slot,
  input  feat_t [N_LANES-1:0]         x,
  input  logic                        minute_tick,
  input  logic                        retrain_req,
  input  logic                        retrain_label,
  // weight load / read back
  input  logic                        w_we,
  input  logic                        w_sel,
  input  logic [6:0]                  w_idx,
  input  wgt_t                        w_wdata,
  output wgt_t                        w_rdata,
  // results
  output logic                        det_valid,
  output logic                        det_label,
  output prob_t                       det_prob,
  output logic                        pred_valid,
  output logic                        pred_label,
  output prob_t                       pred_prob,
  output logic                        busy,
  output logic                        det_sgd_pass,
  output logic                        pred_sgd_pass,
  output logic                        hist_store
);
  localparam int CW   = $clog2(N_CH);
  localparam int HEW  = $clog2(HIST_DEPTH);
  localparam int PW   = 2 * WGT_W + 2;   // product width

  // ---------------- weights ----------------
  wgt_t w_det  [N_CH][N_DET_F];
  wgt_t w_pred [N_CH][N_PRED_F];

  // ---------------- pass control ----------------
  logic [1:0]    phase;
  logic [CW-1:0] ch;
  dp_mode_e      det_mode, pred_mode;      // latched per pass
  logic          det_train_pend;
  logic          det_train_label;
  prob_t         det_prob_last;            // probability of det_hist sample
  feat_t [N_LANES-1:0] det_hist [N_CH];    // detector features of last pass
  logic          store_pend, store_now, store_fin;
  logic          start_pend, last_slot, accept;
  logic [$clog2(HIST_DEPTH+1)-1:0] pred_left_after;
  logic [$clog2(HIST_DEPTH+1)-1:0] pred_left;                // history entries still to train
  logic [HEW-1:0] pred_entry;
  logic          pred_train_label;
  logic signed [PROB_W:0] det_err, pred_err;

  always_comb begin
    phase = 2'(int'(slot) / N_CH);
    ch    = CW'(int'(slot) % N_CH);
  end

  acc_t  acc, z_det, z_pred;
  logic  det_fin, pred_fin;
  acc_t  z_lut;
  prob_t p_lut;
  prob_t pred_prob_nxt;

  // ---------------- history memory ----------------
  feat_t [N_LANES-1:0] h_rd;
  prob_t               h_prob;
  logic [$clog2(HIST_DEPTH+1)-1:0] h_count;
  logic                h_prob_we;

  feature_history #(.DEPTH(HIST_DEPTH), .N_WORDS(2 * N_CH)) u_hist (
    .clk, .rst_n,
    .wr_en     (busy && phase != 2'd0 && store_now),
    .wr_word   ($clog2(2*N_CH)'(int'(slot) - N_CH)),
    .wr_data   (x),
    .prob_we   (h_prob_we),
    .prob_data (pred_prob_nxt),
    .commit    (h_prob_we),
    .rd_entry  (pred_entry),
    .rd_word   ($clog2(2*N_CH)'(int'(slot) - N_CH)),
    .rd_data   (h_rd),
    .rd_prob   (h_prob),
    .count     (h_count)
  );

  // ---------------- lane datapath ----------------
  dp_mode_e            mode;
  feat_t [N_LANES-1:0] xf;
  wgt_t  [N_LANES-1:0] wl;
  logic signed [PW-1:0] prod [N_LANES];
  acc_t                lane_sum;
  logic signed [PROB_W:0] err;

  always_comb begin
    mode = (phase == 2'd0) ? det_mode : pred_mode;
    err  = (phase == 2'd0) ? det_err : pred_err;
    if (mode == MODE_SGD) xf = (phase == 2'd0) ? det_hist[ch] : h_rd;
    else                  xf = x;
    for (int l = 0; l < N_LANES; l++) begin
      case (phase)
        2'd0:    wl[l] = w_det[ch][l];
        2'd1:    wl[l] = w_pred[ch][l];
        default: wl[l] = w_pred[ch][N_LANES + l];
      endcase
    end
    lane_sum = '0;
    for (int l = 0; l < N_LANES; l++) begin
      // the shared array multiplier: weight*x when classifying, err*x in SGD
      prod[l] = (mode == MODE_SGD ? PW'(err) : PW'(wl[l])) * $signed({1'b0, xf[l]});
      lane_sum += acc_t'(prod[l]);
    end
  end

  function automatic wgt_t sgd_step(wgt_t w, logic signed [PW-1:0] p, logic [3:0] sh);
    logic signed [PW:0] v;
    v = (PW+1)'(w) - (PW+1)'(p >>> sh);
    if (v > (PW+1)'(2 ** (WGT_W - 1) - 1)) return {1'b0, {(WGT_W-1){1'b1}}};
    if (v < -((PW+1)'(2 ** (WGT_W - 1)))) return {1'b1, {(WGT_W-1){1'b0}}};
    return wgt_t'(v);
  endfunction

  // ---------------- accumulation and LUT ----------------

  assign z_lut         = det_fin ? z_det : z_pred;
  assign pred_prob_nxt = p_lut;
  assign h_prob_we     = pred_fin && store_fin;
  assign last_slot     = busy && (int'(slot) == 3 * N_CH - 1);
  assign accept        = (start || start_pend) && (!busy || last_slot);
  assign pred_left_after = (last_slot && pred_mode == MODE_SGD) ? pred_left - 1'b1 : pred_left;

  logistic_lut u_lut (.z(z_lut), .p(p_lut));

  // ---------------- detector self-labelling ----------------
  logic hc_train, hc_label;
  hc_labeler u_hc (
    .clk, .rst_n, .en(cfg.det_train_en), .valid(det_valid), .p(det_prob),
    .hi(cfg.hc_hi), .lo(cfg.hc_lo), .cnt(cfg.hc_cnt),
    .train(hc_train), .train_label(hc_label)
  );

  always_comb begin
    det_err  = $signed({1'b0, det_prob_last}) - (det_train_label ? 9'sd255 : 9'sd0);
    pred_err = $signed({1'b0, h_prob}) - (pred_train_label ? 9'sd255 : 9'sd0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot             <= '0;
      busy             <= 1'b0;
      det_mode         <= MODE_CLASSIFY;
      pred_mode        <= MODE_CLASSIFY;
      det_train_pend   <= 1'b0;
      det_train_label  <= 1'b0;
      det_prob_last    <= '0;
      store_pend       <= 1'b0;
      store_now        <= 1'b0;
      store_fin        <= 1'b0;
      start_pend       <= 1'b0;
      pred_left        <= '0;
      pred_entry       <= '0;
      pred_train_label <= 1'b0;
      acc              <= '0;
      z_det            <= '0;
      z_pred           <= '0;
      det_fin          <= 1'b0;
      pred_fin         <= 1'b0;
      det_valid        <= 1'b0;
      det_label        <= 1'b0;
      det_prob         <= '0;
      pred_valid       <= 1'b0;
      pred_label       <= 1'b0;
      pred_prob        <= '0;
      det_sgd_pass     <= 1'b0;
      pred_sgd_pass    <= 1'b0;
      hist_store       <= 1'b0;
      for (int c = 0; c < N_CH; c++) begin
        det_hist[c] <= '0;
        for (int f = 0; f < N_DET_F; f++)  w_det[c][f]  <= '0;
        for (int f = 0; f < N_PRED_F; f++) w_pred[c][f] <= '0;
      end
    end else begin
      det_valid     <= 1'b0;
      pred_valid    <= 1'b0;
      det_fin       <= 1'b0;
      pred_fin      <= 1'b0;
      det_sgd_pass  <= 1'b0;
      pred_sgd_pass <= 1'b0;
      hist_store    <= 1'b0;

      // requests arriving between passes
      if (hc_train) begin
        det_train_pend  <= 1'b1;
        det_train_label <= hc_label;
        det_prob_last   <= det_prob;
      end
      if (retrain_req && cfg.pred_train_en && h_count != 0 && pred_left == 0) begin
        pred_left        <= h_count;
        pred_entry       <= '0;
        pred_train_label <= retrain_label;
      end

      // host weight writes
      if (w_we) begin
        if (!w_sel) w_det[int'(w_idx) / N_DET_F][int'(w_idx) % N_DET_F]     <= w_wdata;
        else        w_pred[int'(w_idx) / N_PRED_F][int'(w_idx) % N_PRED_F] <= w_wdata;
      end

      if (start && !accept) start_pend <= 1'b1;
      if (busy) begin
        // ---- per-slot work ----
        if (mode == MODE_CLASSIFY) begin
          acc <= (slot == '0 || int'(slot) == N_CH) ? lane_sum : acc + lane_sum;
          if (phase == 2'd0) det_hist[ch] <= x;
        end else begin
          for (int l = 0; l < N_LANES; l++) begin
            case (phase)
              2'd0:    w_det[ch][l] <= sgd_step(w_det[ch][l], prod[l], cfg.det_lr_shift);
              2'd1:    w_pred[ch][l] <= sgd_step(w_pred[ch][l], prod[l], cfg.pred_lr_shift);
              default: w_pred[ch][N_LANES + l] <= sgd_step(w_pred[ch][N_LANES + l], prod[l], cfg.pred_lr_shift);
            endcase
          end
        end
        // ---- end of the detector phase ----
        if (int'(slot) == N_CH - 1) begin
          if (det_mode == MODE_CLASSIFY) begin
            z_det   <= acc + lane_sum + acc_t'(cfg.det_bias);
            det_fin <= 1'b1;
          end else begin
            det_train_pend <= 1'b0;
          end
        end
        // ---- end of the predictor phases ----
        if (last_slot) begin
          busy      <= 1'b0;
          store_fin <= store_now;
          store_now <= 1'b0;
          if (pred_mode == MODE_CLASSIFY) begin
            z_pred   <= acc + lane_sum + acc_t'(cfg.pred_bias);
            pred_fin <= 1'b1;
          end else begin
            pred_left  <= pred_left - 1'b1;
            pred_entry <= (int'(pred_entry) == HIST_DEPTH - 1) ? '0 : pred_entry + 1'b1;
          end
        end else begin
          slot <= slot + 1'b1;
        end
      end

      // ---- start of a pass (may follow the last slot back to back) ----
      if (accept) begin
        start_pend    <= 1'b0;
        busy          <= 1'b1;
        slot          <= '0;
        det_mode      <= det_train_pend ? MODE_SGD : MODE_CLASSIFY;
        pred_mode     <= (pred_left_after != 0) ? MODE_SGD : MODE_CLASSIFY;
        store_now     <= store_pend && (pred_left_after == 0);
        if (store_pend && (pred_left_after == 0)) store_pend <= 1'b0;
        det_sgd_pass  <= det_train_pend;
        pred_sgd_pass <= (pred_left_after != 0);
      end
      if (minute_tick) store_pend <= 1'b1;

      // ---- LUT results (one cycle after a phase group ends) ----
      if (det_fin) begin
        det_valid <= 1'b1;
        det_prob  <= p_lut;
        det_label <= (p_lut >= cfg.det_thr);
      end
      if (pred_fin) begin
        pred_valid <= 1'b1;
        pred_prob  <= p_lut;
        pred_label <= (p_lut >= cfg.pred_thr);
        hist_store <= store_fin;
        store_fin  <= 1'b0;
      end
    end
  end

  assign w_rdata = w_sel ? w_pred[int'(w_idx) / N_PRED_F][int'(w_idx) % N_PRED_F]
                         : w_det[int'(w_idx) / N_DET_F][int'(w_idx) % N_DET_F];
endmodule

// spirit_top: the SPIRIT seizure detection / prediction SoC.
//
// Signal flow (one column of the chip per stage):
//   8 x Zoom AFE  : analog core model + Zoom ADC controller (SAR + tracking
//                   incremental conversion), clk_afe
//   8 x CIC       : adjustable decimation to the 1 kHz sample rate, clk_afe
//   sample_cdc    : moves each 8-channel sample into the 24 kHz clk_cls domain
//   feature_extractor : line length and four IIR band powers per channel
//                   (24 cycles per sample); its result is snapshotted when
//                   done and classified during the next 24 cycles
//   feature_selector : band-power ratios and the 24-slot feature order
//   spirit_classifier : shared detector / predictor datapath with SGD,
//                   high-confidence self-labelling and the 30-minute history
//   det_smoother  : 5 consecutive detections -> seizure onset
//   pred_accumulator : +1/-1 accumulation of predictor labels -> prediction
//   pred_check    : 30-minute prediction check -> predictor retraining
//   spirit_regs   : configuration and status registers
// One detection and one prediction decision are made per input sample.
//
// The electrode inputs are `real` voltages because the AFE analog core is a
// behavioural model; everything from the ADC controllers on is synthesizable.
// The CIC ratio comes from the clk_cls register file and is treated as
// static configuration in clk_afe.
//
// Default sizes: 7-bit DAC with 248 incremental cycles (256-cycle
// conversions), CIC ratio 4, so clk_afe = 1.024 MHz gives 1 kHz samples and
// clk_cls is 24 kHz; a minute is 60000 samples and the prediction window 30
// minutes.
module spirit_top
  import spirit_pkg::*;
#(
  parameter int N_INC           = 248,
  parameter int SAMPLES_PER_MIN = 60000,
  parameter int WINDOW_MIN      = 30,
  parameter int WIN             = 100
) (
  input  logic        clk_afe,
  input  logic        clk_cls,
  input  logic        rst_n,
  input  real         vin [N_CH],
  // register bus (clk_cls)
  input  logic        reg_we,
  input  logic [7:0]  reg_addr,
  input  logic [15:0] reg_wdata,
  output logic [15:0] reg_rdata,
  // decisions (clk_cls)
  output logic        det_valid,
  output logic        det_label,
  output logic        pred_valid,
  output logic        pred_label,
  output logic        seizure,         // smoothed detector output
  output logic        seizure_onset,
  output logic        prediction,      // prediction issued
  output logic        tp,
  output logic        fp,
  output logic        fn,
  output logic [5:0]  pred_time_min,
  // activity flags, for observation
  output logic [N_CH-1:0] afe_track_evt,
  output logic        det_sgd_pass,
  output logic        pred_sgd_pass,
  output logic        hist_store,
  output logic        pred_retrain
);
  // ---------------- AFE domain ----------------
  cfg_t       cfg;
  logic [2:0] cic_log2_r;
  sample_t [N_CH-1:0] afe_sample;
  logic    [N_CH-1:0] afe_valid;

  for (genvar c = 0; c < N_CH; c++) begin : g_afe
    logic       sample, sar_mode, int_rst, cmp, cmp_up, cmp_dn, conv_valid;
    logic [6:0] dac_code;
    logic signed [15:0] conv;

    zoom_afe_analog u_analog (
      .clk(clk_afe), .vin(vin[c]), .sample, .sar_mode, .int_rst, .dac_code,
      .cmp, .cmp_up, .cmp_dn
    );
    zoom_adc_ctrl #(.N_INC(N_INC)) u_ctrl (
      .clk(clk_afe), .rst_n, .cmp, .cmp_up, .cmp_dn, .sample, .sar_mode,
      .int_rst, .dac_code, .dout(conv), .dout_valid(conv_valid),
      .track_evt(afe_track_evt[c])
    );
    cic_decimator u_cic (
      .clk(clk_afe), .rst_n, .log2_r(cic_log2_r), .din(conv),
      .din_valid(conv_valid), .dout(afe_sample[c]), .dout_valid(afe_valid[c])
    );
  end

  // ---------------- crossing to the classifier clock ----------------
  sample_t [N_CH-1:0] samples;
  logic               samples_valid;

  sample_cdc #(.W(N_CH * SAMPLE_W)) u_cdc (
    .src_clk(clk_afe), .src_rst_n(rst_n), .din(afe_sample), .din_valid(afe_valid[0]),
    .dst_clk(clk_cls), .dst_rst_n(rst_n), .dout(samples), .dout_valid(samples_valid)
  );

  // ---------------- features ----------------
  ch_feat_t [N_CH-1:0] feat, feat_snap;
  logic                fe_done, fe_busy;

  feature_extractor #(.N_CH(N_CH), .WIN(WIN)) u_fe (
    .clk(clk_cls), .rst_n, .start(samples_valid), .samples, .feat,
    .done(fe_done), .busy(fe_busy)
  );

  always_ff @(posedge clk_cls or negedge rst_n) begin
    if (!rst_n)       feat_snap <= '0;
    else if (fe_done) feat_snap <= feat;
  end

  logic [$clog2(N_SLOTS)-1:0] slot;
  feat_t [N_LANES-1:0]       x;

  feature_selector #(.N_CH(N_CH)) u_sel (.feat(feat_snap), .slot, .x);

  // ---------------- classifier ----------------
  logic       w_we, w_sel;
  logic [6:0] w_idx;
  wgt_t       w_wdata, w_rdata;
  prob_t      det_prob, pred_prob;
  logic       minute_tick, retrain_label, cls_busy;

  spirit_classifier #(.N_CH(N_CH), .HIST_DEPTH(WINDOW_MIN)) u_cls (
    .clk(clk_cls), .rst_n, .cfg, .start(fe_done), .slot, .x,
    .minute_tick, .retrain_req(pred_retrain), .retrain_label,
    .w_we, .w_sel, .w_idx, .w_wdata, .w_rdata,
    .det_valid, .det_label, .det_prob, .pred_valid, .pred_label, .pred_prob,
    .busy(cls_busy), .det_sgd_pass, .pred_sgd_pass, .hist_store
  );

  det_smoother #(.N_CONSEC(5)) u_smooth (
    .clk(clk_cls), .rst_n, .valid(det_valid), .label(det_label),
    .smooth(seizure), .onset(seizure_onset)
  );

  logic [15:0] pred_acc;
  pred_accumulator #(.ACC_W(16)) u_pacc (
    .clk(clk_cls), .rst_n, .valid(pred_valid), .label(pred_label),
    .thr(cfg.pred_acc_thr), .acc(pred_acc), .predict(prediction)
  );

  // The check steps once per input sample; it sees the onset and the
  // prediction pulses of that sample through small sticky flags.
  logic onset_seen, pred_seen, window_open;
  always_ff @(posedge clk_cls or negedge rst_n) begin
    if (!rst_n) begin
      onset_seen <= 1'b0;
      pred_seen  <= 1'b0;
    end else begin
      if (samples_valid) begin
        onset_seen <= seizure_onset;
        pred_seen  <= prediction;
      end else begin
        if (seizure_onset) onset_seen <= 1'b1;
        if (prediction)    pred_seen  <= 1'b1;
      end
    end
  end

  pred_check #(.WINDOW_MIN(WINDOW_MIN), .SAMPLES_PER_MIN(SAMPLES_PER_MIN)) u_chk (
    .clk(clk_cls), .rst_n, .valid(samples_valid),
    .predict(pred_seen || prediction), .onset(onset_seen || seizure_onset),
    .retrain(pred_retrain), .retrain_label, .tp, .fp, .fn, .pred_time_min,
    .window_open, .minute_tick
  );

  spirit_regs u_regs (
    .clk(clk_cls), .rst_n, .we(reg_we), .addr(reg_addr), .wdata(reg_wdata),
    .rdata(reg_rdata), .cfg, .cic_log2_r, .w_we, .w_sel, .w_idx, .w_wdata,
    .w_rdata, .tp, .fp, .fn, .pred_time_min,
    .det_prob, .pred_prob, .pred_acc, .flags({cls_busy, fe_busy, seizure, window_open})
  );
endmodule

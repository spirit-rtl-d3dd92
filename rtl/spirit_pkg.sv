// spirit_pkg: types and constants shared by the SPIRIT seizure detector /
// predictor SoC.
//
// The sizes that come from the design itself are the eight recording
// channels, the five detection features (line length and four band powers),
// the ten prediction features (four band powers and six band-power ratios),
// the five-lane classifier datapath and the 24-slot schedule (3 phases x 8
// channels) that the classifier runs once per 1 kHz input sample at a 24 kHz
// clock. Word widths, fixed-point formats and the band-pass coefficients are
// this implementation's own choices.
package spirit_pkg;

  localparam int N_CH      = 8;    // recording channels
  localparam int N_LANES   = 5;    // features processed in parallel
  localparam int N_DET_F   = 5;    // detection features per channel
  localparam int N_PRED_F  = 10;   // prediction features per channel
  localparam int N_BANDS   = 4;    // theta, alpha, beta, gamma
  localparam int N_PHASES  = 3;    // detection, prediction A, prediction B
  localparam int N_SLOTS   = N_PHASES * N_CH;  // 24 slots per sample

  localparam int SAMPLE_W  = 16;   // signed ADC sample after decimation
  localparam int FEAT_W    = 16;   // unsigned feature value
  localparam int WGT_W     = 16;   // signed weight, Q4.12
  localparam int WGT_FRAC  = 12;
  localparam int PROB_W    = 8;    // probability, 255 == 1.0
  localparam int ACC_W     = 40;   // dot-product accumulator, Q.12

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic        [FEAT_W-1:0]   feat_t;
  typedef logic signed [WGT_W-1:0]    wgt_t;
  typedef logic        [PROB_W-1:0]   prob_t;
  typedef logic signed [ACC_W-1:0]    acc_t;

  typedef enum logic [1:0] {BAND_THETA = 2'd0, BAND_ALPHA = 2'd1,
                            BAND_BETA  = 2'd2, BAND_GAMMA = 2'd3} band_e;

  // What the shared datapath does in one phase of a pass.
  typedef enum logic {MODE_CLASSIFY = 1'b0, MODE_SGD = 1'b1} dp_mode_e;

  // Per-channel features of one sample: line length and four band powers.
  typedef struct packed {
    feat_t                  ll;
    feat_t [N_BANDS-1:0]    bp;   // index = band_e
  } ch_feat_t;

  // Programmed (offline-trained, patient specific) settings.
  typedef struct packed {
    logic                   det_train_en;   // detector online learning
    logic                   pred_train_en;  // predictor online learning
    wgt_t                   det_bias;
    wgt_t                   pred_bias;
    prob_t                  det_thr;        // detection label threshold
    prob_t                  pred_thr;       // prediction label threshold
    prob_t                  hc_hi;          // high-confidence seizure level
    prob_t                  hc_lo;          // high-confidence non-seizure level
    logic [7:0]             hc_cnt;         // consecutive samples needed
    logic [3:0]             det_lr_shift;   // SGD step = (e*x) >>> shift
    logic [3:0]             pred_lr_shift;
    logic [15:0]            pred_acc_thr;   // accumulator prediction threshold
  } cfg_t;

  // 6th-order Butterworth band-pass filters at fs = 1 kHz, three biquads each,
  // coefficients {b0, b1, b2, a1, a2} in Q2.22 (a0 = 1). Each section is
  // scaled to unit gain at the geometric band centre, so the cascade has unit
  // gain there and -3 dB at the band edges.
  localparam int COEF_W    = 24;
  localparam int COEF_FRAC = 22;
  typedef logic signed [COEF_W-1:0] coef_t;
  typedef coef_t [4:0] biquad_t;        // [0]=b0 .. [2]=b2, [3]=a1, [4]=a2
  typedef biquad_t [2:0] sos_t;

  function automatic biquad_t bq(int b0, int b1, int b2, int a1, int a2);
    biquad_t r;
    r[0] = coef_t'(b0); r[1] = coef_t'(b1); r[2] = coef_t'(b2);
    r[3] = coef_t'(a1); r[4] = coef_t'(a2);
    return r;
  endfunction

  function automatic sos_t band_sos(band_e b);
    sos_t s;
    case (b)
      BAND_THETA: begin   // 4-8 Hz
        s[0] = bq(925, 1850, 925, -8279264, 4090192);
        s[1] = bq(70982, 0, -70982, -8311140, 4126524);
        s[2] = bq(2174592, -4349185, 2174592, -8348835, 4157392);
      end
      BAND_ALPHA: begin   // 8-16 Hz
        s[0] = bq(3657, 7314, 3657, -8162235, 3988602);
        s[1] = bq(140795, 0, -140795, -8215778, 4059895);
        s[2] = bq(2164743, -4329486, 2164743, -8303692, 4120781);
      end
      BAND_BETA: begin    // 16-32 Hz
        s[0] = bq(14305, 28611, 14305, -7906158, 3792505);
        s[1] = bq(276923, 0, -276923, -7973578, 3930228);
        s[2] = bq(2144632, -4289264, 2144632, -8197513, 4048358);
      end
      default: begin      // gamma, 32-96 Hz
        s[0] = bq(124925, 249850, 124925, -6544331, 2774044);
        s[1] = bq(1196894, 0, -1196894, -6168680, 3150383);
        s[2] = bq(2786988, -5573977, 2786988, -7772734, 3756333);
      end
    endcase
    return s;
  endfunction

  // Saturate a signed value to an unsigned FEAT_W-bit feature.
  function automatic feat_t sat_feat(logic signed [63:0] v);
    if (v < 0) return '0;
    if (v > 64'(2**FEAT_W - 1)) return '1;
    return feat_t'(v);
  endfunction

endpackage

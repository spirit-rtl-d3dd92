// feature_selector: band-power ratios and the time-multiplexed feature order.
//
// The classifier handles five features per cycle, one channel at a time. A
// sample period has 24 slots: slot = 8*phase + channel.
//   phase 0 (detection):    LL, theta, alpha, beta, gamma
//   phase 1 (prediction A): theta, alpha, beta, gamma, gamma/beta
//   phase 2 (prediction B): gamma/alpha, gamma/theta, beta/alpha,
//                           beta/theta, alpha/theta
// The six ratios (higher band over lower band) are formed here by five
// combinational dividers, shared between phases 1 and 2. A ratio is unsigned
// Q8.8 (numerator * 256 / denominator), saturated to 16 bits; a zero
// denominator gives the maximum (or 0 when the numerator is 0 too).
//
// The paper gives the three phases of eight channels, five features per
// phase, and the ten prediction features; the order inside a phase and the
// ratio format are this design's own. Purely combinational.
module feature_selector
  import spirit_pkg::*;
#(
  parameter int N_CH       = 8,
  parameter int RATIO_FRAC = 8
) (
  input  ch_feat_t [N_CH-1:0]          feat,
  input  logic [$clog2(3*N_CH)-1:0]    slot,
  output feat_t [N_LANES-1:0]          x
);
  localparam int CW = $clog2(N_CH);

  function automatic feat_t ratio(feat_t n, feat_t d);
    logic [FEAT_W+RATIO_FRAC-1:0] q;
    if (d == 0) return (n == 0) ? '0 : '1;
    q = {n, RATIO_FRAC'(0)} / (FEAT_W + RATIO_FRAC)'(d);
    return (q > (FEAT_W + RATIO_FRAC)'(2 ** FEAT_W - 1)) ? '1 : feat_t'(q);
  endfunction

  logic [1:0]    phase;
  logic [CW-1:0] ch;
  ch_feat_t      f;
  feat_t         th, al, be, ga;
  feat_t         num [5];
  feat_t         den [5];
  feat_t         r   [5];

  always_comb begin
    phase = 2'(int'(slot) / N_CH);
    ch    = CW'(int'(slot) % N_CH);
    f     = feat[ch];
    th = f.bp[BAND_THETA]; al = f.bp[BAND_ALPHA];
    be = f.bp[BAND_BETA];  ga = f.bp[BAND_GAMMA];
    // Divider 0 is gamma/beta in phase 1 and gamma/alpha in phase 2.
    num[0] = ga; den[0] = (phase == 2'd1) ? be : al;
    num[1] = ga; den[1] = th;
    num[2] = be; den[2] = al;
    num[3] = be; den[3] = th;
    num[4] = al; den[4] = th;
    for (int i = 0; i < 5; i++) r[i] = ratio(num[i], den[i]);
    case (phase)
      2'd0:    x = {ga, be, al, th, f.ll};
      2'd1:    x = {r[0], ga, be, al, th};
      default: x = {r[4], r[3], r[2], r[1], r[0]};
    endcase
  end
endmodule

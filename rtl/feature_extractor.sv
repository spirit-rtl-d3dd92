// feature_extractor: per-channel seizure features for one 1 kHz sample.
//
// For each of the eight channels it keeps
//   line length  LL  = sum over the last WIN samples of |x[n] - x[n-1]|
//   band power   BPb = sum over the last WIN samples of y_b[n]^2, where y_b is
//                      the output of the band-b 6th-order IIR band-pass filter
//                      (theta 4-8, alpha 8-16, beta 16-32, gamma 32-96 Hz).
// Both are sliding-window sums: each new term is added and the term from WIN
// samples ago, kept in a circular history, is subtracted. Outputs are the
// sums shifted right (LL_SHIFT, BP_SHIFT) and saturated to 16 bits.
//
// Timing: a `start` pulse latches the eight samples; the block then spends
// three cycles per channel (one per biquad section of the four parallel
// filters), 24 cycles in all, and pulses `done`. A start that arrives while
// busy is remembered and served right after, so samples may come every 24
// cycles (the 24 kHz classifier clock at 1 kHz samples). Channel c's line length is
// updated in its first cycle and its band powers in its third. The classifier
// uses the features of one sample during the next sample period.
//
// From the paper: the four bands, 6th-order IIR filters, squaring and a
// 100-sample sliding window, line length, eight channels. Own choices: the
// line length uses the same 100-sample window; output scaling.
module feature_extractor
  import spirit_pkg::*;
#(
  parameter int N_CH     = 8,
  parameter int WIN      = 100,
  parameter int BP_SHIFT = 6,
  parameter int LL_SHIFT = 0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  sample_t [N_CH-1:0]  samples,
  output ch_feat_t [N_CH-1:0] feat,
  output logic                done,
  output logic                busy
);
  localparam int CW = $clog2(N_CH);
  localparam int PW = $clog2(WIN);
  typedef logic [39:0] bsum_t;
  typedef logic [23:0] lsum_t;

  sample_t [N_CH-1:0] smp;
  logic [$clog2(3*N_CH)-1:0] cnt;
  logic [CW-1:0] ch;
  logic [1:0]    sec;
  logic [PW-1:0] ptr;

  sample_t xprev [N_CH];
  logic [15:0] dhist [N_CH][WIN];
  sample_t yhist [N_BANDS][N_CH][WIN];
  lsum_t   ll_sum [N_CH];
  bsum_t   bp_sum [N_CH][N_BANDS];

  sample_t y [N_BANDS];
  sample_t xcur;

  always_comb begin
    ch   = CW'(cnt / 3);
    sec  = 2'(cnt % 3);
    xcur = smp[ch];
  end

  for (genvar b = 0; b < N_BANDS; b++) begin : g_band
    iir_bandpass #(.BAND(band_e'(b)), .N_CH(N_CH)) u_iir (
      .clk, .rst_n, .en(busy), .ch, .sec, .x(xcur), .y(y[b])
    );
  end

  // |x[n] - x[n-1]| of the current channel.
  logic signed [16:0] diff;
  logic [15:0]        absd;
  always_comb begin
    diff = 17'(xcur) - 17'(xprev[ch]);
    absd = (diff < 0) ? 16'(-diff) : 16'(diff);
    if (diff < -65535 || diff > 65535) absd = '1;
  end

  // The window histories are plain memories (no reset): until the window
  // has been filled once, the term leaving the window counts as zero.
  logic        filled;
  logic        pend;      // start seen while busy, served right after
  logic [15:0] d_old;
  sample_t     y_old [N_BANDS];
  always_comb begin
    d_old = filled ? dhist[ch][ptr] : '0;
    for (int b = 0; b < N_BANDS; b++) y_old[b] = filled ? yhist[b][ch][ptr] : '0;
  end

  always_ff @(posedge clk) begin
    if (busy && sec == 2'd0) dhist[ch][ptr] <= absd;
    if (busy && sec == 2'd2)
      for (int b = 0; b < N_BANDS; b++) yhist[b][ch][ptr] <= y[b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      filled <= 1'b0;
      pend   <= 1'b0;
      cnt    <= '0;
      ptr    <= '0;
      smp    <= '0;
      for (int c = 0; c < N_CH; c++) begin
        xprev[c]  <= '0;
        ll_sum[c] <= '0;
        for (int b = 0; b < N_BANDS; b++) bp_sum[c][b] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        smp  <= samples;
        busy <= 1'b1;
        cnt  <= '0;
      end else if (busy) begin
        if (sec == 2'd0) begin
          ll_sum[ch] <= ll_sum[ch] + lsum_t'(absd) - lsum_t'(d_old);
          xprev[ch]  <= xcur;
        end
        if (sec == 2'd2)
          for (int b = 0; b < N_BANDS; b++)
            bp_sum[ch][b] <= bp_sum[ch][b] + bsum_t'(32'(y[b] * y[b]))
                           - bsum_t'(32'(y_old[b] * y_old[b]));
        if (int'(cnt) == 3 * N_CH - 1) begin
          done <= 1'b1;
          if (start || pend) begin      // next sample back to back
            smp  <= samples;
            cnt  <= '0;
            pend <= 1'b0;
          end else begin
            busy <= 1'b0;
          end
          if (int'(ptr) == WIN - 1) begin
            ptr    <= '0;
            filled <= 1'b1;
          end else begin
            ptr <= ptr + 1'b1;
          end
        end else begin
          cnt <= cnt + 1'b1;
          if (start) pend <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int c = 0; c < N_CH; c++) begin
      feat[c].ll = sat_feat(64'(ll_sum[c] >> LL_SHIFT));
      for (int b = 0; b < N_BANDS; b++)
        feat[c].bp[b] = sat_feat(64'(bp_sum[c][b] >> BP_SHIFT));
    end
  end
endmodule

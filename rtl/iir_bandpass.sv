// iir_bandpass: one 6th-order IIR band-pass filter shared by all channels.
//
// The filter is a cascade of three biquad sections (direct form I,
// coefficients from spirit_pkg::band_sos(BAND) in Q2.22). One section is
// evaluated per clock, so a channel takes three cycles (sec = 0, 1, 2) and
// the eight channels take the 24 cycles of one 1 kHz sample period at the
// 24 kHz classifier clock. Per channel and section the two past inputs and two
// past outputs are kept; the section output of the previous cycle is the
// input of the next section. Samples enter with 6 extra fraction bits
// (internal words are 24 bits) and the result is rounded back and saturated
// to 16 bits.
//
// The paper specifies a 6th-order IIR per band and the four bands; the
// Butterworth response, the coefficient format and the one-section-per-cycle
// schedule are this design's own.
//
// Interface: with en high, (ch, sec) name the section evaluated this cycle;
// x is the channel's sample (used in sec 0). y is the combinational output of
// the section being evaluated, the filter output when sec == 2. State is
// updated at the clock edge.
module iir_bandpass
  import spirit_pkg::*;
#(
  parameter band_e BAND = BAND_THETA,
  parameter int    N_CH = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic [$clog2(N_CH)-1:0] ch,
  input  logic [1:0]              sec,
  input  sample_t                 x,
  output sample_t                 y
);
  localparam int IW     = 24;   // internal word
  localparam int IN_SH  = 6;    // extra fraction bits inside the filter
  localparam sos_t SOS  = band_sos(BAND);
  typedef logic signed [IW-1:0] iw_t;

  iw_t x1 [N_CH][3];
  iw_t x2 [N_CH][3];
  iw_t y1 [N_CH][3];
  iw_t y2 [N_CH][3];
  iw_t prev_out;            // output of the section evaluated last cycle

  iw_t   xin;
  iw_t   sec_out;
  logic signed [IW+COEF_W+2:0] acc;
  biquad_t c;

  always_comb begin
    c   = SOS[sec];
    xin = (sec == 2'd0) ? iw_t'(x) <<< IN_SH : prev_out;
    acc = c[0] * xin + c[1] * x1[ch][sec] + c[2] * x2[ch][sec]
        - c[3] * y1[ch][sec] - c[4] * y2[ch][sec];
    acc = (acc + (1 <<< (COEF_FRAC - 1))) >>> COEF_FRAC;
    if (acc > (2 ** (IW - 1) - 1))   sec_out = {1'b0, {(IW-1){1'b1}}};
    else if (acc < -(2 ** (IW - 1))) sec_out = {1'b1, {(IW-1){1'b0}}};
    else                             sec_out = iw_t'(acc);
  end

  // Output: round away the extra fraction bits and saturate to 16 bits.
  logic signed [IW-1:0] y_r;
  always_comb begin
    y_r = (sec_out + iw_t'(1 <<< (IN_SH - 1))) >>> IN_SH;
    if (y_r > 32767)       y = 16'sh7fff;
    else if (y_r < -32768) y = -16'sh8000;
    else                   y = sample_t'(y_r);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_CH; i++)
        for (int s = 0; s < 3; s++) begin
          x1[i][s] <= '0; x2[i][s] <= '0; y1[i][s] <= '0; y2[i][s] <= '0;
        end
      prev_out <= '0;
    end else if (en) begin
      x2[ch][sec] <= x1[ch][sec];
      x1[ch][sec] <= xin;
      y2[ch][sec] <= y1[ch][sec];
      y1[ch][sec] <= sec_out;
      prev_out    <= sec_out;
    end
  end
endmodule

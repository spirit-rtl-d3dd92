// tb_feature_extractor: feeds 260 samples of eight different test signals
// (tones in each band, noise, a step, silence) and after every sample checks
// all 40 features against a reference written here: its own biquad cascades,
// sums of squares and absolute differences over the last 100 samples, then
// the output shift and saturation. Also checks that `done` comes 24 cycles
// after `start`.
module tb_feature_extractor;
  import spirit_pkg::*;
  localparam int WIN = 100;
  logic clk = 0, rst_n = 0, start = 0, done, busy;
  sample_t [7:0] samples;
  ch_feat_t [7:0] feat;
  int checks = 0, failures = 0;

  feature_extractor dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  longint st [4][8][3][4];
  longint xh [8][$];
  longint yh [4][8][$];
  function automatic longint sat(longint v, int w);
    longint mx = (64'sd1 <<< (w - 1)) - 1;
    if (v > mx) return mx;
    if (v < -mx - 1) return -mx - 1;
    return v;
  endfunction
  function automatic longint ref_filter(int bi, int c, longint xs);
    sos_t s = band_sos(band_e'(bi));
    longint v = xs <<< 6;
    for (int k = 0; k < 3; k++) begin
      longint a;
      a = longint'(s[k][0]) * v + longint'(s[k][1]) * st[bi][c][k][0]
        + longint'(s[k][2]) * st[bi][c][k][1] - longint'(s[k][3]) * st[bi][c][k][2]
        - longint'(s[k][4]) * st[bi][c][k][3];
      a = sat((a + (1 <<< 21)) >>> 22, 24);
      st[bi][c][k][1] = st[bi][c][k][0]; st[bi][c][k][0] = v;
      st[bi][c][k][3] = st[bi][c][k][2]; st[bi][c][k][2] = a;
      v = a;
    end
    return sat((v + 32) >>> 6, 16);
  endfunction
  function automatic longint featsat(longint v);
    return v > 65535 ? 65535 : v;
  endfunction

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static real fr [8] = '{6.0, 12.0, 24.0, 60.0, 3.0, 150.0, 0.0, 0.0};
    int bad;
    time t0;
    foreach (st[a, b, c, d]) st[a][b][c][d] = 0;
    for (int c = 0; c < 8; c++) begin
      xh[c].push_back(0);
      for (int b = 0; b < 4; b++) yh[b][c].delete();
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 260; n++) begin
      for (int c = 0; c < 8; c++) begin
        real v;
        if (c < 6)       v = 3000.0 * $sin(2.0 * 3.14159265358979 * fr[c] * n / 1000.0);
        else if (c == 6) v = real'($urandom_range(0, 20000)) - 10000.0;
        else             v = (n > 120) ? 30000.0 : -30000.0;   // full-scale step
        samples[c] = sample_t'($rtoi(v));
      end
      @(negedge clk); start = 1; t0 = $time;
      @(negedge clk); start = 0;
      @(posedge done);
      check(($time - t0) / 10 == 24, $sformatf("24 cycles per sample (%0d)", ($time - t0) / 10));
      #1;
      bad = 0;
      for (int c = 0; c < 8; c++) begin
        longint ll, x;
        ll = 0;
        x = longint'(samples[c]);
        xh[c].push_back(x);
        for (int b = 0; b < 4; b++) begin
          longint bp;
          bp = 0;
          yh[b][c].push_back(ref_filter(b, c, x));
          if (yh[b][c].size() > WIN) void'(yh[b][c].pop_front());
          foreach (yh[b][c][k]) bp += yh[b][c][k] * yh[b][c][k];
          if (longint'(feat[c].bp[b]) != featsat(bp >>> 6)) begin bad++; if (n < 2) $display("c%0d b%0d got %0d exp %0d", c, b, feat[c].bp[b], featsat(bp >>> 6)); end
        end
        if (xh[c].size() > WIN + 1) void'(xh[c].pop_front());
        for (int k = 1; k < xh[c].size(); k++)
          ll += (xh[c][k] > xh[c][k-1]) ? xh[c][k] - xh[c][k-1] : xh[c][k-1] - xh[c][k];
        if (longint'(feat[c].ll) != featsat(ll)) bad++;
      end
      check(bad == 0, $sformatf("sample %0d: %0d of 40 features wrong", n, bad));
    end
    // The in-band tones must dominate their own band.
    check(feat[0].bp[0] > 4 * feat[0].bp[3], "6 Hz tone: theta >> gamma");
    check(feat[3].bp[3] > 4 * feat[3].bp[0], "60 Hz tone: gamma >> theta");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

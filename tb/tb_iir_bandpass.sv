// tb_iir_bandpass: drives the theta and gamma filter instances with the
// 24-cycle channel/section schedule. Every filter output is compared with a
// bit-exact reference biquad cascade written here, and the frequency
// response is checked against the band edges: a 6 Hz tone passes the theta
// filter at about unit gain and is rejected by the gamma filter, a 60 Hz tone
// the other way round, and channels do not disturb each other.
module tb_iir_bandpass;
  import spirit_pkg::*;
  localparam int N_CH = 8;
  logic clk = 0, rst_n = 0, en = 0;
  logic [2:0] ch = '0;
  logic [1:0] sec = '0;
  sample_t x = '0, y_th, y_ga;
  int checks = 0, failures = 0;

  iir_bandpass #(.BAND(BAND_THETA)) u_th (.clk, .rst_n, .en, .ch, .sec, .x, .y(y_th));
  iir_bandpass #(.BAND(BAND_GAMMA)) u_ga (.clk, .rst_n, .en, .ch, .sec, .x, .y(y_ga));
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // Reference state: [band][ch][sec][x1,x2,y1,y2]
  longint st [2][N_CH][3][4];
  function automatic longint sat(longint v, int w);
    longint mx = (64'sd1 <<< (w - 1)) - 1;
    if (v > mx) return mx;
    if (v < -mx - 1) return -mx - 1;
    return v;
  endfunction
  function automatic longint ref_filter(int bi, int c, longint xs);
    sos_t s = band_sos(bi == 0 ? BAND_THETA : BAND_GAMMA);
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

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pk_th [N_CH], pk_ga [N_CH];
    int mism = 0;
    foreach (st[a, b, c, d]) st[a][b][c][d] = 0;
    foreach (pk_th[i]) begin pk_th[i] = 0; pk_ga[i] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 1500; n++) begin
      for (int c = 0; c < N_CH; c++) begin
        sample_t xs;
        real f;
        f = (c % 2 == 0) ? 6.0 : 60.0;
        xs = sample_t'($rtoi(8000.0 * $sin(2.0 * 3.14159265358979 * f * n / 1000.0)));
        if (c >= 6) xs = sample_t'($urandom_range(0, 65535));   // random channels
        for (int s = 0; s < 3; s++) begin
          @(negedge clk);
          en = 1; ch = 3'(c); sec = 2'(s); x = xs;
          if (s == 2) begin
            #1;
            if (longint'(y_th) != ref_filter(0, c, xs) || longint'(y_ga) != ref_filter(1, c, xs)) mism++;
            if (n > 1000 && c < 6) begin
              if ($itor(y_th) > pk_th[c]) pk_th[c] = $itor(y_th);
              if ($itor(y_ga) > pk_ga[c]) pk_ga[c] = $itor(y_ga);
            end
          end
        end
      end
      if (n % 100 == 99) begin
        check(mism == 0, $sformatf("bit-exact outputs up to sample %0d (%0d mismatches)", n, mism));
        mism = 0;
      end
    end
    for (int c = 0; c < 6; c++) begin
      if (c % 2 == 0) begin
        check(pk_th[c] > 7200 && pk_th[c] < 8800, $sformatf("theta passes 6 Hz ch%0d: %f", c, pk_th[c]));
        check(pk_ga[c] < 200, $sformatf("gamma rejects 6 Hz ch%0d: %f", c, pk_ga[c]));
      end else begin
        check(pk_th[c] < 200, $sformatf("theta rejects 60 Hz ch%0d: %f", c, pk_th[c]));
        check(pk_ga[c] > 7200 && pk_ga[c] < 8800, $sformatf("gamma passes 60 Hz ch%0d: %f", c, pk_ga[c]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

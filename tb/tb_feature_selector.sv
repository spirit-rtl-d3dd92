// tb_feature_selector: random feature snapshots; for every one of the 24
// slots the five lane values are compared with the expected feature order and
// with ratios computed here as floor(256*num/den) saturated to 16 bits.
module tb_feature_selector;
  import spirit_pkg::*;
  ch_feat_t [7:0] feat;
  logic [4:0] slot;
  feat_t [4:0] x;
  int checks = 0, failures = 0;

  feature_selector dut (.feat, .slot, .x);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic longint rt(longint n, longint d);
    longint q;
    if (d == 0) return (n == 0) ? 0 : 65535;
    q = (n * 256) / d;
    return q > 65535 ? 65535 : q;
  endfunction

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 40; t++) begin
      for (int c = 0; c < 8; c++) begin
        feat[c].ll = feat_t'($urandom);
        for (int b = 0; b < 4; b++)
          feat[c].bp[b] = (t % 5 == 0 && b == c % 4) ? '0 : feat_t'($urandom_range(0, (t % 2) ? 65535 : 300));
      end
      for (int s = 0; s < 24; s++) begin
        longint e [5];
        longint th, al, be, ga;
        int c;
        c = s % 8;
        th = feat[c].bp[0]; al = feat[c].bp[1]; be = feat[c].bp[2]; ga = feat[c].bp[3];
        case (s / 8)
          0: e = '{feat[c].ll, th, al, be, ga};
          1: e = '{th, al, be, ga, rt(ga, be)};
          default: e = '{rt(ga, al), rt(ga, th), rt(be, al), rt(be, th), rt(al, th)};
        endcase
        slot = 5'(s);
        #1;
        for (int l = 0; l < 5; l++)
          check(longint'(x[l]) == e[l], $sformatf("t%0d slot %0d lane %0d got %0d exp %0d", t, s, l, x[l], e[l]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

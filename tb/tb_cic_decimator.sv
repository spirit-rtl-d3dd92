// tb_cic_decimator: compares the CIC decimator with a reference that forms
// each output directly as the ORDER-fold moving sum of the input (the CIC
// impulse response), shifted and saturated, for ratios 1, 4 and 16 and
// random inputs. Also checks one output per 2^log2_r inputs.
module tb_cic_decimator;
  localparam int ORDER = 3;
  logic clk = 0, rst_n = 0;
  logic [2:0] log2_r = 3'd2;
  logic signed [15:0] din = '0, dout;
  logic din_valid = 0, dout_valid;
  int checks = 0, failures = 0;
  longint hist[$];
  int n_in, n_out;

  cic_decimator dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // Reference: y = sum over k of h[k] x[n-k], h = (box of R)^*ORDER.
  function automatic longint ref_out(int r);
    longint h[$], t[$];
    longint acc = 0;
    h.push_back(1);
    repeat (ORDER) begin
      t.delete();
      for (int i = 0; i < h.size() + r - 1; i++) t.push_back(0);
      foreach (h[i]) for (int j = 0; j < r; j++) t[i+j] += h[i];
      h = t;
    end
    foreach (h[k]) if (hist.size() > k) acc += h[k] * hist[hist.size()-1-k];
    acc = acc >>> (ORDER * $clog2(r));
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return acc;
  endfunction

  initial begin
    #20_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rs[3] = '{0, 2, 4};
    repeat (3) @(posedge clk);
    foreach (rs[ri]) begin
      rst_n = 0; log2_r = 3'(rs[ri]); hist.delete(); n_in = 0; n_out = 0;
      @(posedge clk); rst_n = 1; @(posedge clk); @(posedge clk); #1;
      for (int n = 0; n < 200; n++) begin
        din = 16'($urandom_range(0, 65535));
        if (n % 37 == 5) din = 16'sh7fff;   // full-scale inputs too
        din_valid = 1;
        hist.push_back(longint'(din));
        n_in++;
        @(posedge clk); #1;
        din_valid = 0;
        if (dout_valid) begin
          n_out++;
          check(longint'(dout) == ref_out(1 << rs[ri]),
                $sformatf("R=%0d n=%0d got %0d exp %0d", 1 << rs[ri], n, dout, ref_out(1 << rs[ri])));
        end
        @(posedge clk); #1;
      end
      check(n_out == n_in >> rs[ri], $sformatf("output count %0d", n_out));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_det_smoother: random detector label streams (biased to produce runs);
// the smoothed output must equal "the last 5 labels were all 1" and onset
// must pulse exactly when that becomes true.
module tb_det_smoother;
  logic clk = 0, rst_n = 0, valid = 0, label = 0, smooth, onset;
  int checks = 0, failures = 0, onsets = 0;
  int run = 0;
  bit prev_s = 0;

  det_smoother dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit exp_s;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      valid = 1;
      label = ($urandom_range(0, 99) < ((n / 200) % 2 ? 92 : 40));
      run   = label ? run + 1 : 0;
      exp_s = (run >= 5);
      @(negedge clk);
      valid = 0;
      check(smooth == exp_s, $sformatf("n=%0d smooth", n));
      check(onset == (exp_s && !prev_s), $sformatf("n=%0d onset", n));
      if (onset) onsets++;
      prev_s = exp_s;
      // idle cycles between samples must not change anything
      @(negedge clk);
      check(onset == 1'b0 && smooth == exp_s, "hold between samples");
    end
    check(onsets > 5, "onsets seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

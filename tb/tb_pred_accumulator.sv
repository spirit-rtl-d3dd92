// tb_pred_accumulator: random label streams with preictal-like stretches;
// a reference accumulator (+1/-1, held at 0, reset to 0 when it exceeds the
// threshold) predicts the count and each prediction pulse.
module tb_pred_accumulator;
  logic clk = 0, rst_n = 0, valid = 0, label = 0, predict;
  logic [15:0] thr = 16'd40, acc;
  int checks = 0, failures = 0, preds = 0;

  pred_accumulator dut (.*);
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
    int r = 0;
    bit ep;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      valid = 1;
      label = ($urandom_range(0, 99) < (((n / 300) % 2) ? 75 : 35));
      r = label ? r + 1 : (r > 0 ? r - 1 : 0);
      ep = (r > thr);
      if (ep) r = 0;
      @(negedge clk);
      valid = 0;
      check(predict == ep, $sformatf("n=%0d predict", n));
      check(int'(acc) == r, $sformatf("n=%0d acc %0d exp %0d", n, acc, r));
      if (predict) preds++;
    end
    check(preds > 3, "predictions issued");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

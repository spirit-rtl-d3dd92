// tb_pred_check: scripted sequences of predictions and seizure onsets with a
// short minute (10 samples) and a 30-minute window. Checks the four cases:
// onset inside the window -> true positive with the prediction time in
// minutes; window expiry -> false positive and retraining with label 0;
// onset without a prediction -> false negative and retraining with label 1;
// a second prediction inside an open window does not restart it. Also
// checks the minute tick period.
module tb_pred_check;
  localparam int SPM = 10, WMIN = 30;
  logic clk = 0, rst_n = 0, valid = 0, predict = 0, onset = 0;
  logic retrain, retrain_label, tp, fp, fn, window_open, minute_tick;
  logic [5:0] pred_time_min;
  int checks = 0, failures = 0;
  int n_tp = 0, n_fp = 0, n_fn = 0, n_rt = 0, n_tick = 0, last_tp_time = -1;
  bit last_rt_label;
  int sample = 0;

  pred_check #(.WINDOW_MIN(WMIN), .SAMPLES_PER_MIN(SPM)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic step(bit pr, bit on);
    @(negedge clk);
    valid = 1; predict = pr; onset = on;
    @(negedge clk);
    valid = 0; predict = 0; onset = 0;
    sample++;
    if (tp) begin n_tp++; last_tp_time = pred_time_min; end
    if (fp) n_fp++;
    if (fn) n_fn++;
    if (retrain) begin n_rt++; last_rt_label = retrain_label; end
    if (minute_tick) begin
      n_tick++;
      check(sample % SPM == 0, $sformatf("minute tick at sample %0d", sample));
    end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    repeat (5) step(0, 0);                 // align to the minute grid: 5
    // 1) false negative: onset with no prediction
    step(0, 1);
    check(n_fn == 1 && n_rt == 1 && last_rt_label == 1, "false negative retrains with 1");
    repeat (14) step(0, 0);                // sample 20 = minute boundary
    // 2) true positive: prediction, onset 7 minutes later
    step(1, 0);
    check(window_open, "window opens on prediction");
    repeat (35) step(0, 0);
    step(1, 0);                            // second prediction ignored
    repeat (33) step(0, 0);
    step(0, 1);
    check(n_tp == 1 && n_rt == 1, "true positive does not retrain");
    check(last_tp_time == 7, $sformatf("prediction time %0d min", last_tp_time));
    check(!window_open, "window closed after onset");
    // 3) false positive: prediction, no onset for 30 minutes
    step(1, 0);
    repeat (WMIN * SPM - 12) step(0, 0);
    check(n_fp == 0, "no false positive before the window ends");
    repeat (12) step(0, 0);
    check(n_fp == 1 && n_rt == 2 && last_rt_label == 0, "false positive retrains with 0");
    check(!window_open, "window closed after expiry");
    // 4) true negative: nothing happens
    repeat (100) step(0, 0);
    check(n_rt == 2 && n_tp == 1 && n_fn == 1, "true negative: no events");
    check(n_tick == sample / SPM, "one tick per minute");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

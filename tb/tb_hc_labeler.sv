// tb_hc_labeler: random probability streams with confident stretches; a
// reference counts consecutive samples >= hi and <= lo and expects a training
// pulse with the right label each time a run reaches cnt (run restarts), and
// none when learning is disabled.
module tb_hc_labeler;
  import spirit_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, valid = 0;
  prob_t p = 0, hi = 8'd230, lo = 8'd25;
  logic [7:0] cnt = 8'd4;
  logic train, train_label;
  int checks = 0, failures = 0, n1 = 0, n0 = 0;

  hc_labeler dut (.*);
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
    int rh = 0, rl = 0;
    bit et, el;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int mode;
      mode = (n / 100) % 3;
      if (n == 2500) en = 0;
      @(negedge clk);
      valid = 1;
      p = (mode == 0) ? prob_t'($urandom_range(200, 255)) :
          (mode == 1) ? prob_t'($urandom_range(0, 40)) : prob_t'($urandom_range(0, 255));
      et = 0; el = 0;
      rh = (p >= hi) ? rh + 1 : 0;
      rl = (p <= lo) ? rl + 1 : 0;
      if (p >= hi && rh >= cnt) begin et = 1; el = 1; rh = 0; end
      else if (p <= lo && rl >= cnt) begin et = 1; el = 0; rl = 0; end
      @(negedge clk);
      valid = 0;
      check(train == (et && en), $sformatf("n=%0d train", n));
      if (train) begin
        check(train_label == el, $sformatf("n=%0d label", n));
        if (el) n1++; else n0++;
      end
    end
    check(n1 > 10 && n0 > 10, $sformatf("both labels produced (%0d, %0d)", n1, n0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

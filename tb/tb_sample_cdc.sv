// tb_sample_cdc: sends random sample vectors every 40 source cycles from a
// 1 MHz-like clock to an unrelated slower clock; every vector must arrive
// once, in order, unchanged, within 5 destination cycles.
module tb_sample_cdc;
  localparam int W = 128;
  logic src_clk = 0, dst_clk = 0, src_rst_n = 0, dst_rst_n = 0;
  logic [W-1:0] din = '0, dout;
  logic din_valid = 0, dout_valid;
  int checks = 0, failures = 0, sent = 0, got = 0;
  logic [W-1:0] q [$];
  realtime t_sent [$];

  sample_cdc #(.W(W)) dut (.*);
  always #5 src_clk = ~src_clk;
  always #37 dst_clk = ~dst_clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge dst_clk) if (dst_rst_n && dout_valid) begin
    got++;
    check(q.size() > 0 && dout == q[0], $sformatf("vector %0d", got));
    check($realtime - t_sent[0] <= 5 * 74, "latency within 5 destination cycles");
    void'(q.pop_front());
    void'(t_sent.pop_front());
  end

  initial begin
    #100 src_rst_n = 1; dst_rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      repeat (39) @(posedge src_clk);
      #1;
      din = {$urandom, $urandom, $urandom, $urandom};
      din_valid = 1;
      q.push_back(din); t_sent.push_back($realtime); sent++;
      @(posedge src_clk); #1;
      din_valid = 0;
      din = '1;  // source vector changes afterwards; the capture must hold
    end
    repeat (20) @(posedge dst_clk);
    check(got == sent, $sformatf("all %0d vectors delivered (%0d)", sent, got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_spirit_regs: writes and reads back every configuration register and
// checks the decoded configuration fields, the live status registers, that
// weight addresses are forwarded to the weight port with the right select and
// index (and read data comes back from it), and the saturating TP/FP/FN
// counters.
module tb_spirit_regs;
  import spirit_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  logic [7:0] addr = 0;
  logic [15:0] wdata = 0, rdata;
  cfg_t cfg;
  logic [2:0] cic_log2_r;
  logic w_we, w_sel;
  logic [6:0] w_idx;
  wgt_t w_wdata, w_rdata;
  logic tp = 0, fp = 0, fn = 0;
  logic [5:0] pred_time_min = 6'd17;
  prob_t det_prob = 8'h3c, pred_prob = 8'hc3;
  logic [15:0] pred_acc = 16'd777;
  logic [3:0]  flags = 4'b1010;
  int checks = 0, failures = 0;

  spirit_regs dut (.*);
  always #5 clk = ~clk;
  assign w_rdata = wgt_t'({w_sel, 2'b0, w_idx, 6'h2a});   // recognisable pattern

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(logic [7:0] a, logic [15:0] d);
    @(negedge clk); we = 1; addr = a; wdata = d;
    @(negedge clk); we = 0;
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(cic_log2_r == 3'd2 && !cfg.det_train_en && !cfg.pred_train_en, "reset values");
    wr(8'h00, 16'b1_0111);      // det en, pred en, log2_r = 5
    check(cfg.det_train_en && cfg.pred_train_en && cic_log2_r == 3'd5, "CTRL fields");
    wr(8'h01, 16'hF123); check(cfg.det_bias == 16'shF123, "DET_BIAS");
    wr(8'h02, 16'h0456); check(cfg.pred_bias == 16'sh0456, "PRED_BIAS");
    wr(8'h03, 16'h0081); check(cfg.det_thr == 8'h81, "DET_THR");
    wr(8'h04, 16'h0077); check(cfg.pred_thr == 8'h77, "PRED_THR");
    wr(8'h05, 16'h00F0); check(cfg.hc_hi == 8'hF0, "HC_HI");
    wr(8'h06, 16'h000F); check(cfg.hc_lo == 8'h0F, "HC_LO");
    wr(8'h07, 16'h0009); check(cfg.hc_cnt == 8'd9, "HC_CNT");
    wr(8'h08, 16'h00A6); check(cfg.det_lr_shift == 4'h6 && cfg.pred_lr_shift == 4'hA, "LR");
    wr(8'h09, 16'd1234); check(cfg.pred_acc_thr == 16'd1234, "PRED_ACC_THR");
    begin
      logic [15:0] exp_rd [10] = '{16'h0017, 16'hF123, 16'h0456, 16'h0081, 16'h0077,
                                   16'h00F0, 16'h000F, 16'h0009, 16'h00A6, 16'd1234};
      for (int a = 0; a < 10; a++) begin
        addr = 8'(a); #1;
        check(rdata == exp_rd[a], $sformatf("read back %0h: %h", a, rdata));
      end
    end
    addr = 8'h0A; #1; check(rdata == 16'd17, "PRED_TIME");
    addr = 8'h0E; #1; check(rdata == 16'hc33c, "PROB");
    addr = 8'h0F; #1; check(rdata == 16'd777, "PRED_ACC");
    addr = 8'h10; #1; check(rdata == 16'h000a, "FLAGS");
    // weight forwarding
    for (int a = 8'h3e; a < 8'hd2; a++) begin
      bit isw;
      isw = (a >= 8'h40 && a < 8'h68) || (a >= 8'h80 && a < 8'hd0);
      @(negedge clk); we = 1; addr = 8'(a); wdata = 16'(a * 3);
      #1;
      check(w_we == isw, $sformatf("w_we at %h", a));
      if (isw) begin
        check(w_sel == (a >= 8'h80) && int'(w_idx) == (a >= 8'h80 ? a - 8'h80 : a - 8'h40)
              && w_wdata == wgt_t'(a * 3), $sformatf("weight fields at %h", a));
        check(rdata == w_rdata, $sformatf("weight read at %h", a));
      end
    end
    @(negedge clk); we = 0;
    // event counters
    repeat (5) begin @(negedge clk); tp = 1; @(negedge clk); tp = 0; end
    repeat (3) begin @(negedge clk); fp = 1; fn = 1; @(negedge clk); fp = 0; fn = 0; end
    addr = 8'h0B; #1; check(rdata == 16'd5, "TP count");
    addr = 8'h0C; #1; check(rdata == 16'd3, "FP count");
    addr = 8'h0D; #1; check(rdata == 16'd3, "FN count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

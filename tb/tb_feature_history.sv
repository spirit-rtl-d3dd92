// tb_feature_history: writes 45 one-minute entries of random words and
// probabilities into the 30-entry history and reads back every entry still
// held, checking contents, count saturation at 30 and that the oldest
// entries were overwritten in order.
module tb_feature_history;
  import spirit_pkg::*;
  localparam int DEPTH = 30, NW = 16;
  logic clk = 0, rst_n = 0, wr_en = 0, prob_we = 0, commit = 0;
  logic [3:0] wr_word = 0, rd_word = 0;
  feat_t [4:0] wr_data = '0, rd_data;
  prob_t prob_data = 0, rd_prob;
  logic [4:0] rd_entry = 0;
  logic [4:0] count;
  int checks = 0, failures = 0;
  feat_t [4:0] model_w [DEPTH][NW];
  prob_t model_p [DEPTH];

  feature_history dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wp = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int e = 0; e < 45; e++) begin
      for (int w = 0; w < NW; w++) begin
        @(negedge clk);
        wr_en = 1; wr_word = 4'(w);
        for (int l = 0; l < 5; l++) wr_data[l] = feat_t'($urandom);
        model_w[wp][w] = wr_data;
      end
      @(negedge clk);
      wr_en = 0; prob_we = 1; commit = 1; prob_data = prob_t'($urandom);
      model_p[wp] = prob_data;
      @(negedge clk);
      prob_we = 0; commit = 0;
      wp = (wp + 1) % DEPTH;
      check(int'(count) == ((e + 1 < DEPTH) ? e + 1 : DEPTH), $sformatf("count after %0d", e + 1));
    end
    for (int e = 0; e < DEPTH; e++)
      for (int w = 0; w < NW; w++) begin
        rd_entry = 5'(e); rd_word = 4'(w);
        #1;
        check(rd_data == model_w[e][w], $sformatf("entry %0d word %0d", e, w));
        check(rd_prob == model_p[e], $sformatf("prob %0d", e));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// hc_labeler: unsupervised label generation for the detector's online
// learning (high-confidence thresholds and counters).
//
// The detector trains on its own output, but only when it is confident: a
// run of `cnt` consecutive probabilities at or above `hi` produces a training
// request with label 1, a run of `cnt` consecutive probabilities at or below
// `lo` one with label 0. The run counter restarts after each request, so a
// long confident stretch trains once every `cnt` samples. Short glitches
// break the run and never train.
//
// The paper takes the mechanism from its earlier detector and gives no
// further detail; the restart-after-request rule is this design's own.
//
// Interface: one update per `valid`; `train` is a one-cycle pulse with
// `train_label`, one cycle after the `valid` that completes a run.
module hc_labeler
  import spirit_pkg::*;
#(
  parameter int CNT_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             valid,
  input  prob_t            p,
  input  prob_t            hi,
  input  prob_t            lo,
  input  logic [CNT_W-1:0] cnt,
  output logic             train,
  output logic             train_label
);
  logic [CNT_W-1:0] run_hi, run_lo;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_hi      <= '0;
      run_lo      <= '0;
      train       <= 1'b0;
      train_label <= 1'b0;
    end else begin
      train <= 1'b0;
      if (valid) begin
        run_hi <= (p >= hi) ? run_hi + 1'b1 : '0;
        run_lo <= (p <= lo) ? run_lo + 1'b1 : '0;
        if (p >= hi && run_hi + 1'b1 >= cnt && cnt != 0) begin
          run_hi      <= '0;
          train       <= en;
          train_label <= 1'b1;
        end else if (p <= lo && run_lo + 1'b1 >= cnt && cnt != 0) begin
          run_lo      <= '0;
          train       <= en;
          train_label <= 1'b0;
        end
      end
    end
  end
endmodule

// pred_accumulator: smoothing of the predictor's per-sample labels.
//
// Each classified sample adds +1 (preictal label) or -1 (interictal label).
// When the count exceeds the programmed, patient-specific threshold `thr`
// the block issues a prediction (`predict` pulse) and the count restarts at
// 0. As a seizure approaches, positive labels dominate and the count climbs.
//
// The +1/-1 accumulation, the threshold and the reset to 0 follow the paper.
// The count is held at 0 rather than going negative (the paper does not say
// how the accumulator is bounded); a long interictal stretch therefore does
// not delay a later prediction.
//
// Interface: one update per `valid`; outputs registered, one cycle later.
module pred_accumulator #(
  parameter int ACC_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid,
  input  logic             label,
  input  logic [ACC_W-1:0] thr,
  output logic [ACC_W-1:0] acc,
  output logic             predict
);
  logic [ACC_W-1:0] nxt;

  always_comb begin
    if (label) nxt = (acc == '1) ? acc : acc + 1'b1;
    else       nxt = (acc == '0) ? acc : acc - 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      predict <= 1'b0;
    end else begin
      predict <= 1'b0;
      if (valid) begin
        if (nxt > thr) begin
          acc     <= '0;
          predict <= 1'b1;
        end else begin
          acc <= nxt;
        end
      end
    end
  end
endmodule

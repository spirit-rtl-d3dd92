// pred_check: prediction check logic that decides when the predictor must
// be retrained, using the smoothed detector as ground truth.
//
// A prediction opens a window of WINDOW_MIN minutes (30). Then
//   - seizure onset inside the window: true positive, no retraining; the
//     prediction time (whole minutes since the prediction) is reported;
//   - window expires without an onset: false positive, retrain with label 0;
//   - onset with no open window: false negative, retrain with label 1;
//   - no prediction and no onset: true negative, nothing to do.
// A prediction while a window is already open does not restart it.
// The block also produces `minute_tick`, one pulse every SAMPLES_PER_MIN
// samples, which selects the samples kept in the 30-minute feature history.
//
// The four cases and the 30-minute window follow the paper; the minute is
// counted in samples of the 1 kHz input (60000 by default).
//
// Interface: one step per `valid` (sample); `predict` and `onset` are
// sampled with it. Outputs are one-cycle pulses, registered.
module pred_check #(
  parameter int WINDOW_MIN      = 30,
  parameter int SAMPLES_PER_MIN = 60000
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       valid,
  input  logic       predict,
  input  logic       onset,
  output logic       retrain,
  output logic       retrain_label,
  output logic       tp,
  output logic       fp,
  output logic       fn,
  output logic [5:0] pred_time_min,
  output logic       window_open,
  output logic       minute_tick
);
  localparam int SW = $clog2(SAMPLES_PER_MIN);

  logic [SW-1:0] sub;          // samples into the current minute
  logic [5:0]    win_min;      // minutes since the prediction
  logic          minute_end;

  assign minute_end = (int'(sub) == SAMPLES_PER_MIN - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sub           <= '0;
      win_min       <= '0;
      window_open   <= 1'b0;
      retrain       <= 1'b0;
      retrain_label <= 1'b0;
      tp            <= 1'b0;
      fp            <= 1'b0;
      fn            <= 1'b0;
      pred_time_min <= '0;
      minute_tick   <= 1'b0;
    end else begin
      retrain     <= 1'b0;
      tp          <= 1'b0;
      fp          <= 1'b0;
      fn          <= 1'b0;
      minute_tick <= 1'b0;
      if (valid) begin
        sub         <= minute_end ? '0 : sub + 1'b1;
        minute_tick <= minute_end;
        if (onset) begin
          if (window_open) begin
            tp            <= 1'b1;
            pred_time_min <= win_min;
          end else begin
            fn            <= 1'b1;
            retrain       <= 1'b1;
            retrain_label <= 1'b1;
          end
          window_open <= 1'b0;
        end else if (window_open) begin
          if (minute_end) begin
            if (int'(win_min) == WINDOW_MIN - 1) begin
              window_open   <= 1'b0;
              fp            <= 1'b1;
              retrain       <= 1'b1;
              retrain_label <= 1'b0;
            end else begin
              win_min <= win_min + 1'b1;
            end
          end
        end else if (predict) begin
          window_open <= 1'b1;
          win_min     <= '0;
        end
      end
    end
  end
endmodule

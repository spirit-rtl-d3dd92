// det_smoother: smoothing filter on the detector's per-sample label.
//
// The smoothed output is 1 only after N_CONSEC consecutive positive
// detections (5 in this design, as in the paper), so a single glitch of the
// detector cannot start a predictor check. `onset` pulses on the sample where
// the smoothed output rises: that is the seizure event the prediction check
// compares predictions against.
//
// Interface: one update per `valid` (one per classified sample); outputs are
// registered and change one cycle after `valid`.
module det_smoother #(
  parameter int N_CONSEC = 5
) (
  input  logic clk,
  input  logic rst_n,
  input  logic valid,
  input  logic label,
  output logic smooth,
  output logic onset
);
  logic [$clog2(N_CONSEC+1)-1:0] run;
  logic [$clog2(N_CONSEC+1)-1:0] run_next;

  always_comb begin
    if (!label)                   run_next = '0;
    else if (int'(run) < N_CONSEC) run_next = run + 1'b1;
    else                          run_next = run;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= '0;
      smooth <= 1'b0;
      onset  <= 1'b0;
    end else begin
      onset <= 1'b0;
      if (valid) begin
        run    <= run_next;
        smooth <= (int'(run_next) == N_CONSEC);
        onset  <= (int'(run_next) == N_CONSEC) && !smooth;
      end
    end
  end
endmodule

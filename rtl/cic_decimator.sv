// cic_decimator: adjustable-ratio CIC (Hogenauer) down-sampler behind each
// Zoom ADC.
//
// ORDER integrators run at the ADC conversion rate, a counter keeps every
// 2^log2_r-th integrator output, and ORDER combs (differential delay 1) run at
// the decimated rate. The CIC gain is R^ORDER, so the comb output is shifted
// right by ORDER*log2_r and saturated, giving an output on the same scale as
// the input. Wrap-around in the integrators is harmless because the register
// width IN_W + ORDER*MAX_LOG2_R covers the full gain.
//
// The paper gives the filter type and that the ratio is adjustable; the order,
// the power-of-two ratios and the gain normalisation are this design's own.
// With 4 kHz conversions and log2_r = 2 the output rate is the 1 kHz the
// classifier expects.
//
// Interface: din/din_valid one conversion per strobe; dout/dout_valid one
// output per 2^log2_r inputs, registered one cycle after the input strobe
// that completes it. log2_r is expected to be static; changing it restarts
// the decimation phase count.
module cic_decimator #(
  parameter int ORDER      = 3,
  parameter int MAX_LOG2_R = 4,
  parameter int IN_W       = 16
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [$clog2(MAX_LOG2_R+1)-1:0] log2_r,
  input  logic signed [IN_W-1:0]          din,
  input  logic                            din_valid,
  output logic signed [IN_W-1:0]          dout,
  output logic                            dout_valid
);
  localparam int W = IN_W + ORDER * MAX_LOG2_R;
  typedef logic signed [W-1:0] acc_t;

  acc_t integ [ORDER];
  acc_t dly   [ORDER];
  acc_t comb  [ORDER+1];
  logic [MAX_LOG2_R-1:0] phase;
  logic [$clog2(MAX_LOG2_R+1)-1:0] log2_r_q;
  acc_t integ_next [ORDER];
  acc_t shifted;
  logic last;

  always_comb begin
    integ_next[0] = integ[0] + acc_t'(din);
    for (int i = 1; i < ORDER; i++) integ_next[i] = integ[i] + integ_next[i-1];
  end

  always_comb begin
    comb[0] = integ_next[ORDER-1];
    for (int i = 0; i < ORDER; i++) comb[i+1] = comb[i] - dly[i];
    shifted = comb[ORDER] >>> (ORDER * int'(log2_r));
  end

  assign last = (phase == MAX_LOG2_R'((1 << log2_r) - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ORDER; i++) begin
        integ[i] <= '0;
        dly[i]   <= '0;
      end
      phase      <= '0;
      log2_r_q   <= '0;
      dout       <= '0;
      dout_valid <= 1'b0;
    end else begin
      dout_valid <= 1'b0;
      log2_r_q   <= log2_r;
      if (log2_r_q != log2_r) begin
        phase <= '0;
      end else if (din_valid) begin
        for (int i = 0; i < ORDER; i++) integ[i] <= integ_next[i];
        if (last) begin
          phase <= '0;
          for (int i = 0; i < ORDER; i++) dly[i] <= comb[i];
          if (shifted > acc_t'(2 ** (IN_W - 1) - 1))  dout <= {1'b0, {(IN_W-1){1'b1}}};
          else if (shifted < -acc_t'(2 ** (IN_W - 1))) dout <= {1'b1, {(IN_W-1){1'b0}}};
          else                                         dout <= IN_W'(shifted);
          dout_valid <= 1'b1;
        end else begin
          phase <= phase + 1'b1;
        end
      end
    end
  end
endmodule

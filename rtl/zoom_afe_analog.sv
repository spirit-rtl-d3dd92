// zoom_afe_analog: behavioural model (not synthesizable) of the analog core of
// one Zoom analog front end channel.
//
// A Zoom ADC converts in two steps through one capacitor DAC. During the SAR
// step the input is held and a comparator compares it with the DAC level; the
// controller searches for the coarse reference code. During the incremental
// step a Gm-C integrator integrates the difference between the live input
// and the DAC level, the main comparator reports the integrator's sign and two
// auxiliary comparators report when the integrator passes +/- a fixed offset,
// which the controller uses to move the reference code (the tracking loop).
//
// The model is an ideal integrator and ideal clocked comparators working on
// `real` values. It acts on the falling clock edge so that the controller,
// which works on the rising edge, sees the result of the DAC code it drove in
// the same cycle. DAC level of code c is (c - 2^(DAC_BITS-1)) * LSB with
// LSB = FULL_SCALE_V / 2^DAC_BITS; the 7-bit DAC and the 350 mV full scale
// follow the paper, the comparator offset TRACK_TH_LSB is this model's choice.
// Chopping, the capacitor reset switches, split-steering biasing and circuit
// noise are not modelled.
//
// Ports: vin (volts), sample (hold vin, clear the integrator), sar_mode
// (comparator looks at held input vs DAC), int_rst, dac_code; outputs cmp,
// cmp_up, cmp_dn are registered on the falling edge.
module zoom_afe_analog #(
  parameter int  DAC_BITS     = 7,
  parameter real FULL_SCALE_V = 0.35,
  parameter real TRACK_TH_LSB = 3.0
) (
  input  logic                clk,
  input  real                 vin,
  input  logic                sample,
  input  logic                sar_mode,
  input  logic                int_rst,
  input  logic [DAC_BITS-1:0] dac_code,
  output logic                cmp,
  output logic                cmp_up,
  output logic                cmp_dn
);
  localparam real LSB = FULL_SCALE_V / real'(2 ** DAC_BITS);

  real vhold;
  real integ;
  real vdac;
  real next_integ;

  always_comb begin
    vdac = real'(int'(dac_code) - 2 ** (DAC_BITS - 1)) * LSB;
    if (int_rst || sample) next_integ = 0.0;
    else if (!sar_mode)    next_integ = integ + (vin - vdac);
    else                   next_integ = integ;
  end

  initial begin
    vhold  = 0.0;
    integ  = 0.0;
    cmp    = 1'b0;
    cmp_up = 1'b0;
    cmp_dn = 1'b0;
  end

  always @(negedge clk) begin
    if (sample) vhold <= vin;
    integ  <= next_integ;
    cmp    <= sar_mode ? (vhold >= vdac) : (next_integ >= 0.0);
    cmp_up <= !sar_mode && (next_integ >  TRACK_TH_LSB * LSB);
    cmp_dn <= !sar_mode && (next_integ < -TRACK_TH_LSB * LSB);
  end
endmodule

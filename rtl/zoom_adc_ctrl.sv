// zoom_adc_ctrl: digital controller of one Zoom ADC channel.
//
// One conversion takes 1 + DAC_BITS + N_INC cycles of the incremental clock:
//   SAMPLE  1 cycle: the analog core holds the input and clears its integrator.
//   SAR     DAC_BITS cycles: binary search, MSB first, for the reference code
//           ref = the largest DAC code whose level is not above the input.
//   INC     N_INC cycles: the DAC toggles one LSB around the reference,
//           ref+1 when the integrator is positive and ref-1 otherwise, so the
//           incremental step covers two LSBs around ref. When an auxiliary
//           comparator starts to report that the integrator has passed its
//           offset, ref moves one LSB in that direction (tracking loop).
// The result is only the digital integral of the DAC codes applied during
// INC, dout = sum(code - 2^(DAC_BITS-1)), so SAR/incremental offset does not
// enter it; the input estimate is dout * LSB / N_INC.
//
// Follows the paper: 7-bit DAC shared by both steps, 2-LSB incremental range,
// 1-LSB reference steps, output from the integrated DAC code only. Own
// choices: conversion length (256 cycles by default), reference steps taken
// on the rising edge of an auxiliary comparator so one excursion gives one
// step, and ref held within 1..2^DAC_BITS-2.
//
// Interface: sample/sar_mode/int_rst/dac_code go to the analog core; cmp,
// cmp_up, cmp_dn come back from it (valid at the next rising edge). dout is
// valid with the one-cycle strobe dout_valid at the end of every conversion;
// track_evt pulses for every reference step.
module zoom_adc_ctrl #(
  parameter int DAC_BITS = 7,
  parameter int N_INC    = 248,
  parameter int OUT_W    = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cmp,
  input  logic                    cmp_up,
  input  logic                    cmp_dn,
  output logic                    sample,
  output logic                    sar_mode,
  output logic                    int_rst,
  output logic [DAC_BITS-1:0]     dac_code,
  output logic signed [OUT_W-1:0] dout,
  output logic                    dout_valid,
  output logic                    track_evt
);
  typedef enum logic [1:0] {S_SAMPLE, S_SAR, S_INC} state_e;
  localparam int MID     = 2 ** (DAC_BITS - 1);
  localparam int CODE_MAX = 2 ** DAC_BITS - 1;
  localparam int CNT_W   = $clog2(N_INC + 1);

  state_e                     state;
  logic [DAC_BITS-1:0]        sar_code;
  logic [$clog2(DAC_BITS)-1:0] bitpos;
  logic [DAC_BITS-1:0]        ref_code;
  logic [CNT_W-1:0]           inc_cnt;
  logic signed [OUT_W-1:0]    acc;
  logic                       up_q, dn_q;

  logic [DAC_BITS-1:0] sar_next;
  logic [DAC_BITS-1:0] ref_next;
  logic                step_up, step_dn;

  always_comb begin
    sar_next = sar_code;
    if (cmp) sar_next[bitpos] = 1'b1;
  end

  // Tracking: one reference step per new auxiliary-comparator excursion.
  always_comb begin
    step_up  = cmp_up && !up_q && (int'(ref_code) < CODE_MAX - 1);
    step_dn  = cmp_dn && !dn_q && (int'(ref_code) > 1);
    ref_next = ref_code;
    if (step_up)      ref_next = ref_code + 1'b1;
    else if (step_dn) ref_next = ref_code - 1'b1;
  end

  assign sample   = (state == S_SAMPLE);
  assign int_rst  = (state == S_SAMPLE);
  assign sar_mode = (state != S_INC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_SAMPLE;
      sar_code   <= '0;
      bitpos     <= '0;
      ref_code   <= DAC_BITS'(MID);
      dac_code   <= DAC_BITS'(MID);
      inc_cnt    <= '0;
      acc        <= '0;
      dout       <= '0;
      dout_valid <= 1'b0;
      track_evt  <= 1'b0;
      up_q       <= 1'b0;
      dn_q       <= 1'b0;
    end else begin
      dout_valid <= 1'b0;
      track_evt  <= 1'b0;
      case (state)
        S_SAMPLE: begin
          state    <= S_SAR;
          sar_code <= '0;
          bitpos   <= ($clog2(DAC_BITS))'(DAC_BITS - 1);
          dac_code <= DAC_BITS'(MID);            // MSB trial
          up_q     <= 1'b0;
          dn_q     <= 1'b0;
        end
        S_SAR: begin
          sar_code <= sar_next;
          if (bitpos == 0) begin
            // Clamp so that ref +/- 1 stays a valid DAC code.
            if (sar_next == 0)                    ref_code <= 1;
            else if (int'(sar_next) == CODE_MAX)  ref_code <= DAC_BITS'(CODE_MAX - 1);
            else                                  ref_code <= sar_next;
            if (sar_next == 0)                    dac_code <= 1;
            else if (int'(sar_next) == CODE_MAX)  dac_code <= DAC_BITS'(CODE_MAX - 1);
            else                                  dac_code <= sar_next;
            state   <= S_INC;
            inc_cnt <= '0;
            acc     <= '0;
          end else begin
            bitpos   <= bitpos - 1'b1;
            dac_code <= sar_next | (DAC_BITS'(1) << (bitpos - 1'b1));
          end
        end
        default: begin  // S_INC
          up_q      <= cmp_up;
          dn_q      <= cmp_dn;
          ref_code  <= ref_next;
          track_evt <= step_up || step_dn;
          dac_code  <= cmp ? ref_next + 1'b1 : ref_next - 1'b1;
          if (int'(inc_cnt) == N_INC - 1) begin
            dout       <= acc + OUT_W'(signed'({1'b0, dac_code}) - MID);
            dout_valid <= 1'b1;
            state      <= S_SAMPLE;
          end else begin
            acc     <= acc + OUT_W'(signed'({1'b0, dac_code}) - MID);
            inc_cnt <= inc_cnt + 1'b1;
          end
        end
      endcase
    end
  end
endmodule

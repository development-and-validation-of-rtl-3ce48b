// current_preamp: behavioural model of the channel current preamplifier.
// In the chip a folded cascode charge preamplifier integrates the strip
// current and a current mirror copies it with a gain of 15 into the output
// branch (Iout_preamp) that feeds the current comparator. The model keeps the
// transfer only: i_out = -GAIN * i_in + OFFSET_NA - control_na. The strip
// current is negative for a hit, the output positive, as in the paper's
// simulation plots. OFFSET_NA stands for the mismatch offset of the output
// branch and control_na is the correction applied by the auto-zero amplifier
// through the 'control' mirror. Gain 15 is the paper's; the sign convention,
// the ideal bandwidth and the offset parameter are this model's. Currents in
// nA, combinational, no delay.
`timescale 1ns / 1ps
module current_preamp #(
  parameter real GAIN      = 15.0,
  parameter real OFFSET_NA = 0.0
) (
  input  real i_in_na,
  input  real control_na,
  output real i_out_na
);
  always_comb i_out_na = -GAIN * i_in_na + OFFSET_NA - control_na;
endmodule

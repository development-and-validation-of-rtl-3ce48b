// autozero_amp: behavioural model of the auto-zero (offset correction)
// amplifier of one channel. In the chip, once a second for a few tens of us
// (AZ_clk high), the preamplifier output is switched away from the comparator
// onto a capacitor; a differential amplifier compares the capacitor voltage
// with the comparator's input voltage and, through a current mirror on the
// 'control' line, changes the correction current until the output branch
// carries no offset. Outside that phase the correction is held.
// The model replaces the capacitor loop by a discrete first-order update:
// every STEP_NS while az_clk is high,
//   control_na += LOOP_GAIN * (i_preamp_na - RESIDUAL_NA),
// so the output offset approaches RESIDUAL_NA by a factor (1 - LOOP_GAIN) per
// step. RESIDUAL_NA stands for the amplifier's own imperfection: the real loop
// leaves tens of nA of offset behind (the paper measures -20 nA mean, 29 nA
// RMS after correction); 0 gives a perfect loop. The principle is the
// paper's; STEP_NS, LOOP_GAIN, the discrete form and placing the residue in
// this amplifier are this model's.
// control_na starts at 0.
`timescale 1ns / 1ps
module autozero_amp #(
  parameter real STEP_NS   = 10.0,
  parameter real LOOP_GAIN = 0.25,
  parameter real RESIDUAL_NA = 0.0
) (
  input  logic az_clk,
  input  real  i_preamp_na,
  output real  control_na
);
  initial control_na = 0.0;

  always begin
    #(STEP_NS);
    if (az_clk) control_na = control_na + LOOP_GAIN * (i_preamp_na - RESIDUAL_NA);
  end
endmodule

// current_dac: behavioural model of the 5 bit threshold current DAC of one
// channel. This is an analog block (binary-weighted current sources); the
// model gives its transfer function only: i_threshold = code * i_ref, where
// i_ref is the reference current of one LSB (nominally 200 nA, so the full
// scale code 31 gives 6.2 uA, i.e. 413 nA referred to the preamplifier input
// through its gain of 15). The 5 bit width and 200 nA LSB follow the paper;
// the ideal linear transfer is this model's simplification. Currents are in
// nA. Combinational, no delay.
`timescale 1ns / 1ps
module current_dac #(
  parameter int BITS = 5
) (
  input  logic [BITS-1:0] code,
  input  real             i_ref_na,
  output real             i_threshold_na
);
  always_comb i_threshold_na = real'(code) * i_ref_na;
endmodule

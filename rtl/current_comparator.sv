// current_comparator: behavioural model of the fast current comparator.
// In the chip a CMOS inverter with cascode and feedback transistors toggles
// when the preamplifier output current exceeds the threshold current injected
// by the DAC, and stays toggled for as long as it does, so the output pulse
// lasts as long as the current is above threshold (time over threshold).
// The model is an ideal comparison with no delay; connect low (auto-zero
// phase, preamplifier switched away) holds the output low. out is the signal
// named out_Icompar_int in the paper's schematic.
`timescale 1ns / 1ps
module current_comparator (
  input  real  i_in_na,
  input  real  i_threshold_na,
  input  logic connect,
  output logic out
);
  always_comb out = connect && (i_in_na > i_threshold_na);
endmodule

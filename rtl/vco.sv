// vco: behavioural model of the voltage controlled ring oscillator of the PLL.
// In the chip it is a ring of seven current-starved inverters whose delay is
// set by the charge pump voltage. The model keeps a linear characteristic,
// f = F0_MHZ + KV_MHZ_PER_V * vctrl, clamped to [FMIN_MHZ, FMAX_MHZ], and
// recomputes the half period at every output edge. The seven-stage ring is
// the paper's; the characteristic is this model's (400 MHz at 1.0 V).
`timescale 1ns / 1ps
module vco #(
  parameter real F0_MHZ       = 300.0,
  parameter real KV_MHZ_PER_V = 100.0,
  parameter real FMIN_MHZ     = 100.0,
  parameter real FMAX_MHZ     = 700.0
) (
  input  real  vctrl,
  output logic clk
);
  real f_mhz;

  initial clk = 1'b0;

  always begin
    f_mhz = F0_MHZ + KV_MHZ_PER_V * vctrl;
    if (f_mhz < FMIN_MHZ) f_mhz = FMIN_MHZ;
    if (f_mhz > FMAX_MHZ) f_mhz = FMAX_MHZ;
    #(500.0 / f_mhz);
    clk = ~clk;
  end
endmodule

// charge_pump: behavioural model of the PLL charge pump and its loop filter.
// UP sources and DN sinks a current of ICP_UA into a series R-C filter
// (R_KOHM, C_PF); the control voltage is the capacitor voltage plus the drop
// across the resistor while a current flows. In the chip the filter is
// external, because its capacitors are too large to integrate; it is folded
// into this model for simulation. The capacitor charge is integrated exactly
// between changes of up and dn, so zero-width pulses do nothing. The current,
// the R-C values and the start voltage V0 are this model's choices, picked
// for a damping near 1 and a lock within a few microseconds with the vco
// model. Voltages in V, time in ns.
`timescale 1ns / 1ps
module charge_pump #(
  parameter real ICP_UA = 50.0,
  parameter real C_PF   = 50.0,
  parameter real R_KOHM = 11.0,
  parameter real V0     = 0.0
) (
  input  logic up,
  input  logic dn,
  output real  vctrl
);
  real  v_cap, t_last;
  int   dir_last;

  initial begin
    v_cap    = V0;
    t_last   = 0.0;
    dir_last = 0;
    vctrl    = V0;
  end

  always @(up or dn) begin
    // uA * ns / pF = 1e-3 V
    v_cap    = v_cap + real'(dir_last) * ICP_UA * ($realtime - t_last) / C_PF * 1.0e-3;
    t_last   = $realtime;
    dir_last = int'(up) - int'(dn);
    // uA * kohm = 1e-3 V
    vctrl    = v_cap + real'(dir_last) * ICP_UA * R_KOHM * 1.0e-3;
  end
endmodule

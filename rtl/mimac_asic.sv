// mimac_asic: the 64 channel front end ASIC for the MIMAC micro-TPC.
// Each of the 64 inputs watches one strip of anode pixels. A channel raises
// its output while its amplified current is above a programmable threshold
// (time over threshold), lengthened to at least 16..22 ns for short pulses.
// All 64 outputs are sampled together at the 50 MHz reference clock, so one
// sample is one 20 ns time slice of the drift (the Z coordinate), and sent
// on eight serial links at 400 MHz: link 2g carries D7..D0 and link 2g+1
// D15..D8 of group g (channels 16g..16g+15), MSB first, one 8 bit frame per
// reference period starting at its rising edge once the PLL is locked. A
// frame carries the samples taken one reference period earlier. A slow
// serial link writes the thresholds, the channel enables, the monostable
// width and a fixed training pattern that can replace the data on every
// link, for aligning the receiver.
// The structure is the paper's; the LVDS pads are not modelled, so the
// reference clock comes in and the links go out single-ended. az_clk, the
// auto-zero phase, is an input, and the chip has a reset pin rst_n: both are
// choices of this design. clk_fast is the PLL output, brought out for
// observation only. With MISMATCH set (the default) every channel carries a
// preamplifier offset of the size the paper measured, so the chip must go
// through an auto-zero phase (az_clk high for about 2 us in this model)
// before its outputs mean anything; after it, a residual offset of the
// measured size (tens of nA at the comparator input) remains.
`timescale 1ns / 1ps
module mimac_asic
  import mimac_pkg::*;
#(
  parameter bit MISMATCH = 1'b1   // give the channels the modelled offset spread
) (
  input  logic               clk_ref,
  input  logic               rst_n,
  input  real                i_strip_na [N_CH],
  input  logic               az_clk,
  input  logic               sc_clk,
  input  logic               sc_din,
  input  logic               sc_load,
  output logic               sc_dout,
  output logic [N_LINKS-1:0] ser_out,
  output logic [N_CH-1:0]    ch_out,
  output logic               clk_fast
);
  asic_cfg_t                    cfg;
  logic [$clog2(SER_RATIO)-1:0] phase;

  slow_control u_sc (
    .sc_clk(sc_clk), .rst_n(rst_n), .sc_din(sc_din), .sc_load(sc_load),
    .sc_dout(sc_dout), .cfg(cfg));

  pll #(.RATIO(SER_RATIO)) u_pll (
    .clk_ref(clk_ref), .rst_n(rst_n), .clk_fast(clk_fast), .phase(phase));

  for (genvar g = 0; g < N_GROUPS; g++) begin : g_grp
    real i_grp [CH_PER_GROUP];
    for (genvar c = 0; c < CH_PER_GROUP; c++) begin : g_in
      assign i_grp[c] = i_strip_na[g*CH_PER_GROUP + c];
    end

    channel_group #(.GROUP(g), .MISMATCH(MISMATCH)) u_grp (
      .clk_ref(clk_ref), .clk_fast(clk_fast), .rst_n(rst_n), .phase(phase),
      .i_strip_na(i_grp), .az_clk(az_clk),
      .dac(cfg.dac[g*CH_PER_GROUP +: CH_PER_GROUP]),
      .ch_enable(cfg.ch_enable[g*CH_PER_GROUP +: CH_PER_GROUP]),
      .mono_adjust(cfg.mono_adjust), .pattern_sel(cfg.pattern_sel),
      .pattern(cfg.pattern), .ch_out(ch_out[g*CH_PER_GROUP +: CH_PER_GROUP]),
      .ser_lsb(ser_out[2*g]), .ser_msb(ser_out[2*g+1]));
  end
endmodule

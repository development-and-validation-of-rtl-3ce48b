// fe_channel: one analog channel of the front end, as a behavioural model.
// The strip current goes through the x15 current preamplifier to the current
// comparator, whose threshold is set by the 5 bit DAC. The channel output is
// the OR of the comparator output and of a monostable triggered by it, so a
// pulse shorter than 16..22 ns is lengthened to that width while a long one
// keeps its time over threshold. While az_clk is high the auto-zero amplifier
// takes the preamplifier output away from the comparator and trims the
// offset correction. This chain and the OR gate are the paper's; the
// parameters of the models below are this design's (see each model).
// OFFSET_NA sets the mismatch offset of this channel's preamplifier and
// RESIDUAL_NA the offset the auto-zero loop leaves behind. Currents
// in nA; the output is asynchronous and is sampled at 50 MHz downstream.
`timescale 1ns / 1ps
module fe_channel #(
  parameter real OFFSET_NA = 0.0,
  parameter real RESIDUAL_NA = 0.0,
  parameter real I_REF_NA  = 200.0
) (
  input  real        i_strip_na,
  input  logic [4:0] dac_code,
  input  logic [2:0] adjust,
  input  logic       az_clk,
  output logic       out
);
  real  i_preamp_na, control_na, i_threshold_na;
  logic comp_out, mono_out;

  current_preamp #(.GAIN(15.0), .OFFSET_NA(OFFSET_NA)) u_preamp (
    .i_in_na(i_strip_na), .control_na(control_na), .i_out_na(i_preamp_na));

  autozero_amp #(.RESIDUAL_NA(RESIDUAL_NA)) u_az (
    .az_clk(az_clk), .i_preamp_na(i_preamp_na), .control_na(control_na));

  current_dac #(.BITS(5)) u_dac (
    .code(dac_code), .i_ref_na(I_REF_NA), .i_threshold_na(i_threshold_na));

  current_comparator u_comp (
    .i_in_na(i_preamp_na), .i_threshold_na(i_threshold_na),
    .connect(!az_clk), .out(comp_out));

  monostable #(.MIN_NS(16.0), .MAX_NS(22.0), .ADJ_BITS(3)) u_mono (
    .trig(comp_out), .adjust(adjust), .out(mono_out));

  assign out = comp_out | mono_out;
endmodule

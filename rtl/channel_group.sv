// channel_group: one of the four groups of 16 channels of the ASIC.
// Sixteen analog channels feed the 50 MHz sampler and test multiplexer; the
// resulting 16 bit word D15..D0 leaves on two serial links at 400 MHz, the
// LSB link carrying D7..D0 and the MSB link D15..D8, most significant bit
// first, one frame per reference period. This grouping and the two links per
// group follow the paper. Configuration (thresholds, enables, pattern) comes
// from the chip's slow control register. With MISMATCH set, channel c of
// group GROUP gets the preamplifier offset mismatch_offset_na(16*GROUP + c)
// (see mimac_pkg), which the auto-zero phase must remove before use, and
// the auto-zero leaves it with residual_offset_na(16*GROUP + c).
`timescale 1ns / 1ps
module channel_group
  import mimac_pkg::*;
#(
  parameter int GROUP    = 0,
  parameter bit MISMATCH = 1'b1
) (
  input  logic                                   clk_ref,
  input  logic                                   clk_fast,
  input  logic                                   rst_n,
  input  logic [$clog2(SER_RATIO)-1:0]           phase,
  input  real                                    i_strip_na [CH_PER_GROUP],
  input  logic                                   az_clk,
  input  logic [CH_PER_GROUP-1:0][DAC_BITS-1:0]  dac,
  input  logic [CH_PER_GROUP-1:0]                ch_enable,
  input  logic [ADJ_BITS-1:0]                    mono_adjust,
  input  logic                                   pattern_sel,
  input  logic [PATTERN_BITS-1:0]                pattern,
  output logic [CH_PER_GROUP-1:0]                ch_out,
  output logic                                   ser_lsb,
  output logic                                   ser_msb
);
  logic [CH_PER_GROUP-1:0] word;

  for (genvar c = 0; c < CH_PER_GROUP; c++) begin : g_ch
    fe_channel #(
      .OFFSET_NA(MISMATCH ? mismatch_offset_na(GROUP * CH_PER_GROUP + c) : 0.0),
      .RESIDUAL_NA(MISMATCH ? residual_offset_na(GROUP * CH_PER_GROUP + c) : 0.0)) u_ch (
      .i_strip_na(i_strip_na[c]), .dac_code(dac[c]), .adjust(mono_adjust),
      .az_clk(az_clk), .out(ch_out[c]));
  end

  sample_mux #(.WIDTH(CH_PER_GROUP)) u_mux (
    .clk_ref(clk_ref), .rst_n(rst_n), .ch_in(ch_out), .ch_enable(ch_enable),
    .pattern_sel(pattern_sel), .pattern(pattern), .word(word));

  serializer8 #(.RATIO(SER_RATIO)) u_ser_lsb (
    .clk_fast(clk_fast), .rst_n(rst_n), .phase(phase),
    .par_in(word[SER_RATIO-1:0]), .sout(ser_lsb));

  serializer8 #(.RATIO(SER_RATIO)) u_ser_msb (
    .clk_fast(clk_fast), .rst_n(rst_n), .phase(phase),
    .par_in(word[2*SER_RATIO-1:SER_RATIO]), .sout(ser_msb));
endmodule

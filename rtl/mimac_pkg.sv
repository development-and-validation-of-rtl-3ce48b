// mimac_pkg: sizes and the configuration record shared by the front end ASIC.
// The chip has 64 channels in four groups of 16, a 5 bit threshold DAC per
// channel, and eight serial links that each carry 8 bits per 50 MHz reference
// period (8:1 serialisation at 400 MHz). These numbers follow the paper. The
// 16 bit training pattern width and the single chip-wide monostable setting
// are choices of this design.
`timescale 1ns / 1ps
package mimac_pkg;
  localparam int N_CH         = 64;
  localparam int N_GROUPS     = 4;
  localparam int CH_PER_GROUP = 16;
  localparam int DAC_BITS     = 5;
  localparam int SER_RATIO    = 8;
  localparam int N_LINKS      = N_GROUPS * CH_PER_GROUP / SER_RATIO;
  localparam int ADJ_BITS     = 3;
  localparam int PATTERN_BITS = CH_PER_GROUP;

  // Working configuration held by the slow control register. Shifted in
  // most significant bit first: pattern[15] is the first bit sent.
  typedef struct packed {
    logic [PATTERN_BITS-1:0]        pattern;      // fixed training pattern D15..D0
    logic                           pattern_sel;  // 1: send pattern, 0: comparator data
    logic [ADJ_BITS-1:0]            mono_adjust;  // monostable width setting
    logic [N_CH-1:0]                ch_enable;    // 1: channel enabled
    logic [N_CH-1:0][DAC_BITS-1:0]  dac;          // per-channel threshold code
  } asic_cfg_t;

  localparam int CFG_BITS = $bits(asic_cfg_t);

  // Preamplifier output offset of channel ch before auto-zero correction,
  // for simulating mismatch. The paper reports, over 200 channels, a mean of
  // -1180 nA and an RMS spread of 4991 nA. Here the 64 channels get a
  // uniform spread with that mean and RMS (half width 4991 * sqrt(3) nA),
  // assigned in the scrambled order k = (37 * ch) mod 64.
  localparam real OFFSET_MEAN_NA = -1180.0;
  localparam real OFFSET_RMS_NA  = 4991.0;

  function automatic real mismatch_offset_na(input int ch);
    int k;
    k = (37 * ch) % N_CH;
    return OFFSET_MEAN_NA
         + OFFSET_RMS_NA * 1.7320508 * (2.0 * real'(k) / real'(N_CH - 1) - 1.0);
  endfunction

  // Offset left in the output branch after auto-zero. The paper reports a
  // mean of -20 nA and an RMS spread of 29 nA over the same 200 channels;
  // the 64 channels get a uniform spread with those values, in a second
  // scrambled order k = (29 * ch + 7) mod 64.
  localparam real RESIDUAL_MEAN_NA = -20.0;
  localparam real RESIDUAL_RMS_NA  = 29.0;

  function automatic real residual_offset_na(input int ch);
    int k;
    k = (29 * ch + 7) % N_CH;
    return RESIDUAL_MEAN_NA
         + RESIDUAL_RMS_NA * 1.7320508 * (2.0 * real'(k) / real'(N_CH - 1) - 1.0);
  endfunction
endpackage

// sample_mux: 50 MHz sampler and test multiplexer of one group of 16 channels.
// On every rising edge of the reference clock the 16 channel outputs are
// registered, disabled channels are forced to 0, and the word handed to the
// serializers is either these samples or the fixed training pattern, as
// pattern_sel chooses. One register stage: word is valid one reference period
// after the edge that sampled it. Sampling at 50 MHz, the per-channel enable
// and the pattern multiplexer come from the paper; forcing a disabled channel
// to 0 and placing the multiplexer after the sampling register are choices of
// this design.
`timescale 1ns / 1ps
module sample_mux #(
  parameter int WIDTH = 16
) (
  input  logic             clk_ref,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] ch_in,
  input  logic [WIDTH-1:0] ch_enable,
  input  logic             pattern_sel,
  input  logic [WIDTH-1:0] pattern,
  output logic [WIDTH-1:0] word
);
  logic [WIDTH-1:0] sampled;

  always_ff @(posedge clk_ref or negedge rst_n) begin
    if (!rst_n) sampled <= '0;
    else        sampled <= ch_in & ch_enable;
  end

  always_comb word = pattern_sel ? pattern : sampled;
endmodule

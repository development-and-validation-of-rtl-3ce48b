// slow_control: the slow serial configuration link of the ASIC.
// A shift register as long as the whole configuration (asic_cfg_t, 404 bits)
// takes one bit from sc_din on every rising edge of sc_clk, most significant
// bit first. On a rising sc_clk edge with sc_load high the register does not
// shift; instead its contents are copied to the working configuration cfg.
// sc_dout is the last stage of the shift register, so the previous contents
// come back out (readback) or feed the next chip of a daisy chain.
// The paper says what the link sets (thresholds, channel enables, training
// pattern); the shift-and-load protocol and the reset values (thresholds at
// 31, channels disabled, comparator data selected, pattern 0) are this
// design's choice. cfg is static configuration: it is meant to be changed
// only while its users ignore it, so it is not resynchronised.
`timescale 1ns / 1ps
module slow_control
  import mimac_pkg::*;
(
  input  logic      sc_clk,
  input  logic      rst_n,
  input  logic      sc_din,
  input  logic      sc_load,
  output logic      sc_dout,
  output asic_cfg_t cfg
);
  logic [CFG_BITS-1:0] shreg;

  function automatic asic_cfg_t reset_cfg();
    asic_cfg_t c;
    c             = '0;
    c.dac         = {N_CH{DAC_BITS'((1 << DAC_BITS) - 1)}};
    return c;
  endfunction

  always_ff @(posedge sc_clk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '0;
      cfg   <= reset_cfg();
    end else if (sc_load) begin
      cfg   <= asic_cfg_t'(shreg);
    end else begin
      shreg <= {shreg[CFG_BITS-2:0], sc_din};
    end
  end

  assign sc_dout = shreg[CFG_BITS-1];
endmodule

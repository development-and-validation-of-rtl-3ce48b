// serializer8: 8:1 serializer of one LVDS link, clocked at 400 MHz.
// phase is the bit slot from the PLL divider (0..7, slot 0 starting at the
// reference clock rising edge). At slot 3, in the middle of a reference
// period, the parallel word from the 50 MHz domain is captured into a holding
// register; at the end of slot 7 it is loaded into the shift register, whose
// most significant bit is then sent first. A word therefore leaves as
// par_in[7] in slot 0 down to par_in[0] in slot 7 of the reference period that
// follows its capture, the order the paper's frame figure shows (D7..D0 and
// D15..D8). The mid-period capture and hence the latency are this design's
// choice.
`timescale 1ns / 1ps
module serializer8 #(
  parameter int RATIO = 8
) (
  input  logic                     clk_fast,
  input  logic                     rst_n,
  input  logic [$clog2(RATIO)-1:0] phase,
  input  logic [RATIO-1:0]         par_in,
  output logic                     sout
);
  localparam int PW           = $clog2(RATIO);
  localparam int CAPTURE_SLOT = RATIO / 2 - 1;
  logic [RATIO-1:0] hold, shreg;

  always_ff @(posedge clk_fast or negedge rst_n) begin
    if (!rst_n) begin
      hold  <= '0;
      shreg <= '0;
    end else begin
      if (phase == PW'(CAPTURE_SLOT)) hold <= par_in;
      if (phase == PW'(RATIO - 1))    shreg <= hold;
      else                       shreg <= {shreg[RATIO-2:0], 1'b0};
    end
  end

  assign sout = shreg[RATIO-1];
endmodule

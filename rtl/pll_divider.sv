// pll_divider: the divide-by-eight of the PLL feedback path.
// A 3 bit counter on the VCO clock. div_clk is high for counts 0..3, so it
// rises on the edge where the count wraps to 0; the phase detector aligns that
// edge with the reference clock rising edge. The count is also the bit slot of
// the serializers (0 = first bit of a frame). The ratio of eight is the
// paper's; using the counter as the serializer slot is this design's choice.
`timescale 1ns / 1ps
module pll_divider #(
  parameter int RATIO = 8
) (
  input  logic                     clk_fast,
  input  logic                     rst_n,
  output logic [$clog2(RATIO)-1:0] phase,
  output logic                     div_clk
);
  localparam int PW = $clog2(RATIO);

  always_ff @(posedge clk_fast or negedge rst_n) begin
    if (!rst_n)                  phase <= '0;
    else if (phase == PW'(RATIO - 1)) phase <= '0;
    else                         phase <= phase + 1'b1;
  end

  assign div_clk = (phase < PW'(RATIO / 2));
endmodule

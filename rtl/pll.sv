// pll: the x8 clock multiplier that makes the 400 MHz serializer clock from
// the 50 MHz reference, so that all chips sharing the reference sample and
// send in step. Four blocks, as in the paper: the phase detector compares the
// reference with the VCO clock divided by eight and drives the charge pump,
// whose filtered voltage sets the VCO frequency. The divider count is brought
// out as the serializer bit slot: in lock, slot 0 starts at the reference
// rising edge. phase_detector and pll_divider are logic; charge_pump and vco
// are behavioural models. After reset the loop needs a few microseconds to
// lock (no lock detector is described or built).
`timescale 1ns / 1ps
module pll #(
  parameter int RATIO = 8
) (
  input  logic                     clk_ref,
  input  logic                     rst_n,
  output logic                     clk_fast,
  output logic [$clog2(RATIO)-1:0] phase
);
  logic up, dn, div_clk;
  real  vctrl;

  phase_detector u_pfd (.clk_ref(clk_ref), .div_clk(div_clk), .rst_n(rst_n), .up(up), .dn(dn));

  charge_pump u_cp (.up(up), .dn(dn), .vctrl(vctrl));

  vco u_vco (.vctrl(vctrl), .clk(clk_fast));

  pll_divider #(.RATIO(RATIO)) u_div (
    .clk_fast(clk_fast), .rst_n(rst_n), .phase(phase), .div_clk(div_clk));
endmodule

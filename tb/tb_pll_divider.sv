// tb_pll_divider: over 100 divided periods the count must step 0..7 and
// wrap, div_clk must be high exactly for counts 0..3, and div_clk must rise
// once every 8 input cycles.
`timescale 1ns / 1ps
module tb_pll_divider;
  logic       clk = 1'b0, rst_n = 1'b0, div_clk;
  logic [2:0] phase, exp_phase;
  int         checks = 0, failures = 0, rises = 0;

  pll_divider #(.RATIO(8)) dut (.clk_fast(clk), .rst_n(rst_n), .phase(phase), .div_clk(div_clk));

  always #1.25 clk = ~clk;
  always @(posedge div_clk) rises++;

  initial begin
    #3.1;
    checks++;
    if (phase !== 3'd0 || div_clk !== 1'b1) failures++;
    rst_n = 1'b1;
    rises = 0;
    exp_phase = 3'd0;
    for (int i = 0; i < 800; i++) begin
      @(negedge clk);
      exp_phase = exp_phase + 3'd1;
      checks++;
      if (phase !== exp_phase || div_clk !== (exp_phase < 3'd4)) begin
        failures++;
        $display("FAIL cycle %0d: phase %0d div %0d expected %0d", i, phase, div_clk, exp_phase);
      end
    end
    checks++;
    if (rises != 100) begin failures++; $display("FAIL %0d div_clk rises", rises); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

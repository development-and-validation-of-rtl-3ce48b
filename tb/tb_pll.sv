// tb_pll: checks that the x8 PLL locks to a 50 MHz reference.
// After a settling time the testbench measures, over 200 reference periods,
// the number of VCO edges per reference period (must be 8), the VCO period
// (2.5 ns within 2 %), and the alignment of the divider: the bit slot must be
// 7 just before and 0 just after each reference rising edge.
`timescale 1ns / 1ps
module tb_pll;
  logic       clk_ref = 1'b0, rst_n = 1'b0;
  logic       clk_fast;
  logic [2:0] phase;
  int         checks = 0, failures = 0;
  int         nfast = 0;

  pll dut (.clk_ref(clk_ref), .rst_n(rst_n), .clk_fast(clk_fast), .phase(phase));

  always #10 clk_ref = ~clk_ref;
  always @(posedge clk_fast) nfast++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  initial begin
    realtime t0;
    int      n0;
    #35 rst_n = 1'b1;
    #20000;                                  // 20 us to lock
    @(posedge clk_ref);
    #0.3;
    for (int i = 0; i < 200; i++) begin
      // here: 0.3 ns after a reference rising edge
      n0 = nfast;
      check(phase == 3'd0, "slot 0 after ref edge");
      @(posedge clk_fast);
      t0 = $realtime;
      @(posedge clk_fast);
      check(($realtime - t0) > 2.45 && ($realtime - t0) < 2.55, "VCO period 2.5 ns");
      @(negedge clk_ref);
      #9.7;
      check(phase == 3'd7, "slot 7 before ref edge");
      #0.6;
      check(nfast - n0 == 8, $sformatf("8 VCO edges per ref period, got %0d", nfast - n0));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_phase_detector: two 20 ns clocks with a known skew. When the reference
// leads by d, up must be high for d ns each period and dn never; when the
// divided clock leads, the other way round; a skew of 50 ps gives a 50 ps pulse.
`timescale 1ns / 1ps
module tb_phase_detector;
  logic    clk_ref = 1'b0, div_clk = 1'b0, rst_n = 1'b1, up, dn;
  int      checks = 0, failures = 0;
  real     w_up, w_dn;

  phase_detector dut (.clk_ref(clk_ref), .div_clk(div_clk), .rst_n(rst_n), .up(up), .dn(dn));

  // pulse widths measured by sampling on a 10 ps grid, offset by 5 ps
  initial begin
    #0.005;
    forever begin
      if (up) w_up = w_up + 0.01;
      if (dn) w_dn = w_dn + 0.01;
      #0.01;
    end
  end

  task automatic run(input real skew);   // > 0: reference leads
    w_up = 0; w_dn = 0;
    for (int i = 0; i < 10; i++) begin
      if (skew >= 0) begin
        clk_ref = 1'b1; #(skew); div_clk = 1'b1; #(10.0 - skew);
        clk_ref = 1'b0; #(skew); div_clk = 1'b0; #(10.0 - skew);
      end else begin
        div_clk = 1'b1; #(-skew); clk_ref = 1'b1; #(10.0 + skew);
        div_clk = 1'b0; #(-skew); clk_ref = 1'b0; #(10.0 + skew);
      end
    end
    checks++;
    if (skew >= 0 && (w_up < 10 * skew - 0.2 || w_up > 10 * skew + 0.2 || w_dn > 0.05)) begin
      failures++; $display("FAIL skew %f: up %f dn %f", skew, w_up, w_dn);
    end
    if (skew < 0 && (w_dn < -10 * skew - 0.2 || w_dn > -10 * skew + 0.2 || w_up > 0.05)) begin
      failures++; $display("FAIL skew %f: up %f dn %f", skew, w_up, w_dn);
    end
  endtask

  initial begin
    #1 rst_n = 1'b0;   // reset edge clears the power-up state
    #4 rst_n = 1'b1;
    #5;
    run(0.05);
    run(1.5);
    run(-2.5);
    run(0.2);
    run(-0.7);
    checks++;
    if (up || dn) failures++;
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

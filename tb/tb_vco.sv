// tb_vco: the period measured over 100 cycles must be 1 / (300 MHz +
// 100 MHz/V * vctrl): 2.5 ns at 1.0 V (400 MHz), 2.857 ns at 0.5 V, and the
// clamps at 100 MHz and 700 MHz for out-of-range voltages.
`timescale 1ns / 1ps
module tb_vco;
  real  v;
  logic clk;
  int   checks = 0, failures = 0;

  vco #(.F0_MHZ(300.0), .KV_MHZ_PER_V(100.0), .FMIN_MHZ(100.0), .FMAX_MHZ(700.0)) dut (.vctrl(v), .clk(clk));

  task automatic measure(input real volts, input real exp_ns);
    realtime t0;
    v = volts;
    repeat (3) @(posedge clk);
    t0 = $realtime;
    repeat (100) @(posedge clk);
    checks++;
    if (($realtime - t0) / 100.0 < exp_ns * 0.995 || ($realtime - t0) / 100.0 > exp_ns * 1.005) begin
      failures++;
      $display("FAIL %f V: period %f expected %f", volts, ($realtime - t0) / 100.0, exp_ns);
    end
  endtask

  initial begin
    measure(1.0, 2.5);
    measure(0.5, 1000.0 / 350.0);
    measure(2.0, 2.0);
    measure(-5.0, 10.0);
    measure(9.0, 1000.0 / 700.0);
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

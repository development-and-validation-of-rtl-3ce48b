// tb_charge_pump: with 50 uA, 50 pF and 11 kohm, a 10 ns UP pulse must lift
// the control voltage by 0.55 V during the pulse (R drop) and leave 10 mV
// on the capacitor; a 4 ns DN pulse must remove 4 mV; UP and DN together
// must do nothing.
`timescale 1ns / 1ps
module tb_charge_pump;
  logic up = 1'b0, dn = 1'b0;
  real  v;
  int   checks = 0, failures = 0;

  charge_pump #(.ICP_UA(50.0), .C_PF(50.0), .R_KOHM(11.0), .V0(0.5)) dut (.up(up), .dn(dn), .vctrl(v));

  task automatic check(input real e, input string what);
    checks++;
    if (v < e - 1.0e-6 || v > e + 1.0e-6) begin
      failures++; $display("FAIL %s: %f expected %f", what, v, e);
    end
  endtask

  initial begin
    #5 check(0.5, "start");
    up = 1'b1; #5 check(0.5 + 0.55 + 0.0, "during UP (R drop)");
    #5 up = 1'b0; #1 check(0.51, "after 10 ns UP");
    dn = 1'b1; #4 dn = 1'b0; #1 check(0.506, "after 4 ns DN");
    up = 1'b1; dn = 1'b1; #7 up = 1'b0; dn = 1'b0; #1 check(0.506, "UP and DN together");
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

// tb_autozero_amp: closes the loop around a preamplifier stand-in whose
// output is offset - control. During a 2 us auto-zero phase the correction
// must converge to the offset (residual below 1 nA); afterwards it must hold
// while the preamplifier output changes. Tried for several offsets. A second
// loop with RESIDUAL_NA = -20 nA must settle at that residue instead of 0.
`timescale 1ns / 1ps
module tb_autozero_amp;
  logic az_clk = 1'b0;
  real  offset = 0.0, i_pre, ctl, held, i_pre2, ctl2;
  int   checks = 0, failures = 0;

  autozero_amp #(.STEP_NS(10.0), .LOOP_GAIN(0.25)) dut (
    .az_clk(az_clk), .i_preamp_na(i_pre), .control_na(ctl));

  autozero_amp #(.STEP_NS(10.0), .LOOP_GAIN(0.25), .RESIDUAL_NA(-20.0)) dut2 (
    .az_clk(az_clk), .i_preamp_na(i_pre2), .control_na(ctl2));

  always_comb i_pre  = offset - ctl;
  always_comb i_pre2 = offset - ctl2;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s: ctl %f offset %f", what, ctl, offset); end
  endtask

  initial begin
    real offs [4] = '{5000.0, -9000.0, 1234.5, -20.0};
    foreach (offs[i]) begin
      offset = offs[i];
      #3 az_clk = 1'b1;
      #40;
      check(i_pre > -9500.0 && (i_pre * offs[i] >= 0.0), "partially corrected after 40 ns");
      check(i_pre * i_pre > 0.01 || offs[i] == 0.0, "not yet converged after 40 ns");
      #1960 az_clk = 1'b0;
      check(i_pre < 1.0 && i_pre > -1.0, "residual offset below 1 nA");
      check(i_pre2 < -19.0 && i_pre2 > -21.0, "imperfect loop settles at its residue");
      held   = ctl;
      offset = offs[i] + 3000.0;        // signal present, loop must not move
      #500;
      check(ctl == held, "correction held outside auto-zero");
      offset = offs[i];
    end
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

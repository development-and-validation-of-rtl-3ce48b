// tb_monostable: for each adjust setting a 5 ns trigger must give a pulse of
// 16 + adjust * 6/7 ns (16 ns to 22 ns); a second trigger inside the pulse
// must not stretch it; a long trigger still gives the same pulse width.
`timescale 1ns / 1ps
module tb_monostable;
  logic       trig = 1'b0, out;
  logic [2:0] adjust;
  int         checks = 0, failures = 0;
  realtime    t_rise, t_fall;

  monostable #(.MIN_NS(16.0), .MAX_NS(22.0), .ADJ_BITS(3)) dut (.trig(trig), .adjust(adjust), .out(out));

  always @(posedge out) t_rise = $realtime;
  always @(negedge out) t_fall = $realtime;

  task automatic check_width(input real w, input string what);
    checks++;
    if ((t_fall - t_rise) < w - 0.01 || (t_fall - t_rise) > w + 0.01) begin
      failures++;
      $display("FAIL %s adjust %0d: width %f expected %f", what, adjust, t_fall - t_rise, w);
    end
  endtask

  initial begin
    for (int a = 0; a < 8; a++) begin
      adjust = 3'(a);
      #10 trig = 1'b1;
      #5  trig = 1'b0;
      #40 check_width(16.0 + a * 6.0 / 7.0, "short trigger");
      trig = 1'b1; #2 trig = 1'b0; #8 trig = 1'b1; #2 trig = 1'b0;
      #40 check_width(16.0 + a * 6.0 / 7.0, "retrigger ignored");
    end
    adjust = 3'd7;
    #10 trig = 1'b1;
    #50 trig = 1'b0;
    #10 check_width(22.0, "long trigger");
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

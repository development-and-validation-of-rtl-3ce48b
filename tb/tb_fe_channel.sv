// tb_fe_channel: one channel with a 2500 nA preamplifier offset and a
// threshold of code 10 (2000 nA at the preamplifier output, 133 nA at its
// input). Before auto-zero the offset alone keeps the output high; after a
// 2 us auto-zero phase it is low. Then: a 430 nA, 10 ns strip pulse must give
// an output pulse as long as the monostable (16 + 3 * 6/7 ns for adjust 3);
// a 100 ns pulse must give a 100 ns output (time over threshold); a 100 nA
// pulse (1500 nA after gain, below threshold) must give nothing; during
// auto-zero the output must stay low whatever the input.
`timescale 1ns / 1ps
module tb_fe_channel;
  real        i_strip = 0.0;
  logic [4:0] code = 5'd10;
  logic [2:0] adj = 3'd3;
  logic       az = 1'b0, out;
  int         checks = 0, failures = 0;
  realtime    t_rise = 0, t_fall = 0;
  int         n_rise = 0;

  fe_channel #(.OFFSET_NA(2500.0), .I_REF_NA(200.0)) dut (
    .i_strip_na(i_strip), .dac_code(code), .adjust(adj), .az_clk(az), .out(out));

  always @(posedge out) begin t_rise = $realtime; n_rise++; end
  always @(negedge out) t_fall = $realtime;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (rise %f fall %f n %0d)", what, t_rise, t_fall, n_rise); end
  endtask

  task automatic pulse(input real amp_na, input real width_ns);
    i_strip = -amp_na;
    #(width_ns);
    i_strip = 0.0;
    #200;
  endtask

  initial begin
    #100 check(out == 1'b1, "offset alone fires the channel before auto-zero");
    az = 1'b1;
    #20 check(out == 1'b0, "output low during auto-zero");
    i_strip = -430.0;
    #100 check(out == 1'b0, "input ignored during auto-zero");
    i_strip = 0.0;
    #1880 az = 1'b0;
    #100 check(out == 1'b0, "quiet after auto-zero");
    n_rise = 0;
    pulse(430.0, 10.0);
    check(n_rise == 1, "short pulse seen once");
    check((t_fall - t_rise) > 16.0 + 3.0 * 6.0 / 7.0 - 0.01 &&
          (t_fall - t_rise) < 16.0 + 3.0 * 6.0 / 7.0 + 0.01, "short pulse lengthened by the monostable");
    pulse(430.0, 100.0);
    check(n_rise == 2, "long pulse seen once");
    check((t_fall - t_rise) > 99.99 && (t_fall - t_rise) < 100.01, "long pulse keeps its time over threshold");
    pulse(100.0, 100.0);
    check(n_rise == 2, "sub-threshold pulse ignored");
    code = 5'd0;
    pulse(10.0, 50.0);
    check(n_rise == 3, "code 0 fires on any input");
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

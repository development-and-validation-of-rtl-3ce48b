// tb_current_preamp: the output must be -15 * input + offset - correction,
// here with a 700 nA offset, for the paper's -430 nA example and random
// inputs and corrections.
`timescale 1ns / 1ps
module tb_current_preamp;
  real i_in, ctl, i_out, exp_out;
  int  checks = 0, failures = 0;

  current_preamp #(.GAIN(15.0), .OFFSET_NA(700.0)) dut (
    .i_in_na(i_in), .control_na(ctl), .i_out_na(i_out));

  task automatic try(input real a, input real c);
    i_in = a; ctl = c; #1;
    exp_out = 700.0 - 15.0 * a - c;
    checks++;
    if (i_out < exp_out - 0.01 || i_out > exp_out + 0.01) begin
      failures++;
      $display("FAIL in %f ctl %f: out %f expected %f", a, c, i_out, exp_out);
    end
  endtask

  initial begin
    try(0.0, 0.0);
    try(-430.0, 700.0);           // 6450 nA, close to the 5.5 uA of the paper's plot
    try(0.0, 700.0);              // offset cancelled
    for (int k = 0; k < 100; k++)
      try(-real'($urandom_range(1000)), real'($urandom_range(2000)) - 1000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

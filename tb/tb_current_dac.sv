// tb_current_dac: every code 0..31 with the nominal 200 nA reference and a
// few other reference values; the threshold must be code times the reference.
`timescale 1ns / 1ps
module tb_current_dac;
  logic [4:0] code;
  real        i_ref, i_th;
  int         checks = 0, failures = 0;

  current_dac #(.BITS(5)) dut (.code(code), .i_ref_na(i_ref), .i_threshold_na(i_th));

  initial begin
    real refs [3] = '{200.0, 150.0, 250.0};
    foreach (refs[r]) begin
      for (int c = 0; c < 32; c++) begin
        code  = 5'(c);
        i_ref = refs[r];
        #1;
        checks++;
        if (i_th < c * refs[r] - 0.001 || i_th > c * refs[r] + 0.001) begin
          failures++;
          $display("FAIL code %0d ref %f: %f", c, refs[r], i_th);
        end
      end
    end
    // full scale referred to the input: 31 * 200 / 15 = 413.3 nA
    code = 5'd31; i_ref = 200.0; #1;
    checks++;
    if (i_th / 15.0 < 413.0 || i_th / 15.0 > 413.7) failures++;
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

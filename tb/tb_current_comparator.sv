// tb_current_comparator: output high only when connected and the input
// current is above the threshold, for a grid of currents and thresholds.
`timescale 1ns / 1ps
module tb_current_comparator;
  real  i_in, i_th;
  logic conn, out;
  int   checks = 0, failures = 0;

  current_comparator dut (.i_in_na(i_in), .i_threshold_na(i_th), .connect(conn), .out(out));

  initial begin
    for (int t = 0; t < 32; t++) begin
      for (int a = -2; a < 70; a += 3) begin
        for (int c = 0; c < 2; c++) begin
          i_th = 200.0 * t; i_in = 100.0 * a + 1.0; conn = c[0]; #1;
          checks++;
          if (out !== (c == 1 && (100 * a + 1) > 200 * t)) begin
            failures++;
            $display("FAIL in %f th %f conn %0d out %0d", i_in, i_th, c, out);
          end
        end
      end
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

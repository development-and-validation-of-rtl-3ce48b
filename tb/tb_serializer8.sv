// tb_serializer8: a 400 MHz clock, a bit slot counter and a word that
// changes at every slot 0 (as a 50 MHz register would). Each frame must
// carry, MSB first in slots 0..7, the word present during the previous
// reference period: 8 bits per 8 fast cycles, one period of latency.
`timescale 1ns / 1ps
module tb_serializer8;
  logic       clk = 1'b0, rst_n = 1'b0, sout;
  logic [2:0] phase = 3'd0;
  logic [7:0] par = 8'h00, prev = 8'h00, rx;
  int         checks = 0, failures = 0;

  serializer8 #(.RATIO(8)) dut (.clk_fast(clk), .rst_n(rst_n), .phase(phase), .par_in(par), .sout(sout));

  always #1.25 clk = ~clk;
  always @(posedge clk) if (rst_n) phase <= phase + 3'd1;

  initial begin
    #6.1 rst_n = 1'b1;
    for (int f = 0; f < 300; f++) begin
      // middle of slot 0: the word changes here, far from its capture slot
      do @(negedge clk); while (phase != 3'd0);
      prev  = par;
      par   = 8'($urandom);
      rx[7] = sout;
      for (int b = 6; b >= 0; b--) begin
        @(negedge clk);
        rx[b] = sout;
      end
      if (f > 1) begin
        checks++;
        if (rx !== prev) begin
          failures++;
          $display("FAIL frame %0d: got %h expected %h", f, rx, prev);
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

// tb_sample_mux: random channel outputs, enables and pattern select for 500
// reference periods. After every rising edge the word must be the channel
// outputs present at that edge ANDed with the enables, or the pattern when
// pattern_sel is high; between edges the sampled data must not follow the
// inputs.
`timescale 1ns / 1ps
module tb_sample_mux;
  logic        clk = 1'b0, rst_n = 1'b0, sel = 1'b0;
  logic [15:0] ch = '0, en = '0, pat = '0, word, exp_data;
  int          checks = 0, failures = 0, n_pat = 0, n_data = 0;

  sample_mux #(.WIDTH(16)) dut (.clk_ref(clk), .rst_n(rst_n), .ch_in(ch), .ch_enable(en),
                                .pattern_sel(sel), .pattern(pat), .word(word));

  always #10 clk = ~clk;

  initial begin
    #25 rst_n = 1'b1;
    checks++;
    if (word !== 16'h0) failures++;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      ch  = 16'($urandom);
      en  = (i % 7 == 0) ? 16'hFFFF : 16'($urandom);
      pat = 16'($urandom);
      sel = ($urandom_range(3) == 0);
      exp_data = ch & en;
      @(posedge clk);
      #1;
      ch = ~ch;                          // inputs move after the edge
      #1;
      checks++;
      if (sel) n_pat++; else n_data++;
      if (word !== (sel ? pat : exp_data)) begin
        failures++;
        $display("FAIL i=%0d sel %0d word %h expected %h", i, sel, word, sel ? pat : exp_data);
      end
    end
    checks++;
    if (n_pat == 0 || n_data == 0) failures++;
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

// tb_threshold_scan: the threshold dispersion measurement of one chip, as a
// test bench would make it on silicon. After auto-zero, all 64 thresholds are
// set to one DAC code and, for every channel at once, the smallest strip
// current pulse that the chip reports on its serial links is found by
// bisection (100 ns pulses, 14 steps, about 0.05 nA resolution). The result
// must be (code * 200 nA - r) / 15 for every channel, r being the offset the
// auto-zero left in that channel (residual_offset_na): about 40 nA at code 3
// (the setting of the published dispersion plots), 133 nA at code 10 and
// 413 nA at code 31 (the largest threshold). At code 3 the mean and RMS over
// the 64 channels are printed: the residue (-20 nA mean, 29 nA RMS at the
// preamplifier output) gives about 41.3 nA and 1.9 nA at the input. The
// models have no noise and no DAC mismatch.
`timescale 1ns / 1ps
module tb_threshold_scan;
  import mimac_pkg::*;
  logic clk_ref = 1'b0, rx_clk = 1'b1, rst_n = 1'b1, az = 1'b0;
  logic sc_clk = 1'b0, sc_run = 1'b0, sc_din = 1'b0, sc_load = 1'b0, sc_dout, clk_fast;
  real  i_strip [N_CH];
  logic [N_LINKS-1:0] ser_out;
  logic [N_CH-1:0]    ch_out, seen;
  logic [2:0]         rx_phase = 3'd4;
  logic [N_LINKS-1:0][7:0] sr;
  int   checks = 0, failures = 0;
  logic [CFG_BITS-1:0] unused_rb;

  mimac_asic dut (
    .clk_ref(clk_ref), .rst_n(rst_n), .i_strip_na(i_strip), .az_clk(az),
    .sc_clk(sc_clk), .sc_din(sc_din), .sc_load(sc_load), .sc_dout(sc_dout),
    .ser_out(ser_out), .ch_out(ch_out), .clk_fast(clk_fast));

  always #10   clk_ref = ~clk_ref;
  always #1.25 rx_clk  = ~rx_clk;
  always @(posedge rx_clk) rx_phase <= rx_phase + 3'd1;
  always #25   sc_clk = sc_run ? ~sc_clk : 1'b0;

  // receiver: OR of every received slice into 'seen'
  always @(negedge rx_clk) begin
    for (int l = 0; l < N_LINKS; l++) sr[l] = {sr[l][6:0], ser_out[l]};
    if (rx_phase == 3'd7) seen = seen | sr;
  end

  task automatic write_cfg(input asic_cfg_t v);
    logic [CFG_BITS-1:0] b;
    b = v;
    sc_run = 1'b1;
    for (int i = CFG_BITS - 1; i >= 0; i--) begin
      unused_rb[i] = sc_dout;
      sc_din       = b[i];
      @(posedge sc_clk);
      #1;
    end
    sc_load = 1'b1;
    @(posedge sc_clk);
    #1 sc_load = 1'b0;
    sc_run = 1'b0;
  endtask

  task automatic scan(input int code);
    asic_cfg_t cfg;
    real lo [N_CH], hi [N_CH], thr, worst, sum, sum2, mean;
    cfg = '0;
    for (int c = 0; c < N_CH; c++) cfg.dac[c] = 5'(code);
    cfg.ch_enable = '1;
    write_cfg(cfg);
    for (int c = 0; c < N_CH; c++) begin lo[c] = 0.0; hi[c] = 800.0; end
    for (int step = 0; step < 14; step++) begin
      @(posedge clk_ref);
      #2;
      for (int c = 0; c < N_CH; c++) i_strip[c] = -(lo[c] + hi[c]) / 2.0;
      seen = '0;
      #100;
      for (int c = 0; c < N_CH; c++) i_strip[c] = 0.0;
      repeat (5) @(posedge clk_ref);
      for (int c = 0; c < N_CH; c++)
        if (seen[c]) hi[c] = (lo[c] + hi[c]) / 2.0;
        else         lo[c] = (lo[c] + hi[c]) / 2.0;
    end
    worst = 0.0;
    sum   = 0.0;
    sum2  = 0.0;
    for (int c = 0; c < N_CH; c++) begin
      thr  = (real'(code) * 200.0 - residual_offset_na(c)) / 15.0;
      sum  += hi[c];
      sum2 += hi[c] * hi[c];
      checks++;
      if (hi[c] < thr - 0.2 || hi[c] > thr + 0.2) begin
        failures++;
        $display("FAIL code %0d channel %0d: minimum signal %f nA, expected %f", code, c, hi[c], thr);
      end
      if (hi[c] - thr > worst) worst = hi[c] - thr;
      if (thr - hi[c] > worst) worst = thr - hi[c];
    end
    mean = sum / real'(N_CH);
    $display("code %0d: threshold mean %f nA, RMS %f nA, worst deviation from expected %f nA",
             code, mean, $sqrt(sum2 / real'(N_CH) - mean * mean), worst);
  endtask

  initial begin
    for (int c = 0; c < N_CH; c++) i_strip[c] = 0.0;
    #1  rst_n = 1'b0;
    #34 rst_n = 1'b1;
    az = 1'b1;
    #2000 az = 1'b0;
    scan(3);
    scan(10);
    scan(31);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #300000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

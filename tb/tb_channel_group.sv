// tb_channel_group: one group of 16 channels with its sampler and two
// serializers, clocked by an ideal 50 MHz reference and an aligned 400 MHz
// clock (no PLL). The channels carry their modelled offsets, so the test
// starts with a 2 us auto-zero phase. It then checks, by deserialising both
// links at mid-bit:
//  - pattern mode: every frame is the pattern, D7..D0 on the LSB link and
//    D15..D8 on the MSB link, MSB first;
//  - data mode: random hit patterns, one per reference period (20 ns
//    current pulses), appear two frames later with disabled channels at 0;
//  - short 5 ns pulses between sampling edges, which the comparator alone
//    would miss, are caught thanks to the monostable.
`timescale 1ns / 1ps
module tb_channel_group;
  import mimac_pkg::*;
  logic clk_ref = 1'b0, clk_fast = 1'b1, rst_n = 1'b0, az = 1'b0;
  logic [2:0]  phase = 3'd4;
  real         i_strip [16];
  logic [15:0][4:0] dac;
  logic [15:0] en, pattern, ch_out;
  logic        sel, ser_lsb, ser_msb;
  logic [7:0]  sr_l, sr_m;
  logic [15:0] rx [int];        // received word per reference period
  logic [15:0] expw [int];      // expected word per reference period
  int          period = 0, checks = 0, failures = 0, n_short = 0;

  channel_group #(.GROUP(0), .MISMATCH(1'b1)) dut (
    .clk_ref(clk_ref), .clk_fast(clk_fast), .rst_n(rst_n), .phase(phase),
    .i_strip_na(i_strip), .az_clk(az), .dac(dac), .ch_enable(en), .mono_adjust(3'd0),
    .pattern_sel(sel), .pattern(pattern), .ch_out(ch_out), .ser_lsb(ser_lsb), .ser_msb(ser_msb));

  always #10   clk_ref  = ~clk_ref;     // rising edges at 10 + 20k
  always #1.25 clk_fast = ~clk_fast;    // rising edges at 2.5k
  always @(posedge clk_fast) phase <= phase + 3'd1;   // 0 from each reference edge
  always @(posedge clk_ref) period <= period + 1;     // period p starts at edge p

  // deserialiser: sample in the middle of each bit slot
  always @(negedge clk_fast) begin
    sr_l = {sr_l[6:0], ser_lsb};
    sr_m = {sr_m[6:0], ser_msb};
    if (phase == 3'd7) rx[period] = {sr_m, sr_l};
  end

  task automatic set_hits(input logic [15:0] h);
    for (int c = 0; c < 16; c++) i_strip[c] = h[c] ? -430.0 : 0.0;
  endtask

  initial begin
    set_hits('0);
    for (int c = 0; c < 16; c++) dac[c] = 5'd10;
    en = 16'hFFFF; sel = 1'b1; pattern = 16'hA53C;
    #5 rst_n = 1'b1;
    az = 1'b1;
    #2000 az = 1'b0;
    // pattern mode for 20 periods
    @(posedge clk_ref);
    repeat (20) @(posedge clk_ref);
    for (int p = period - 15; p < period; p++) begin
      checks++;
      if (rx[p] !== 16'hA53C) begin failures++; $display("FAIL pattern period %0d: %h", p, rx[p]); end
    end
    // data mode: channel 5 and 12 disabled
    sel = 1'b0;
    en  = 16'hFFFF & ~(16'h1 << 5) & ~(16'h1 << 12);
    repeat (3) @(posedge clk_ref);
    for (int k = 0; k < 200; k++) begin
      logic [15:0] h;
      int p0;
      #1 p0 = period;                    // 1 ns after reference edge p0
      h = 16'($urandom);
      #2;
      if (k % 5 == 4) begin
        // short pulses, 5 ns, well between two sampling edges
        set_hits('0);
        #9 set_hits(h);
        #5 set_hits('0);
        n_short++;
      end else begin
        set_hits(h);
      end
      expw[p0 + 2] = h & en;             // sampled at edge p0+1, sent in period p0+2
      @(posedge clk_ref);
    end
    set_hits('0);
    repeat (3) @(posedge clk_ref);
    foreach (expw[p]) begin
      checks++;
      if (!rx.exists(p) || rx[p] !== expw[p]) begin
        failures++;
        $display("FAIL data period %0d: got %h expected %h", p, rx[p], expw[p]);
      end
    end
    checks++;
    if (n_short == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

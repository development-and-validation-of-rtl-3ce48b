// tb_prototype_2x256: the detector prototype of the paper, a 2 x 256 strip
// anode read by eight chips sharing one 50 MHz reference clock (chips 0..3
// on the X strips, 4..7 on the Y strips, strip s on channel s mod 64 of chip
// s / 64). Each chip is auto-zeroed and configured (threshold code 10, all
// channels on, data mode) over its own slow link. A straight recoil track
// crossing the anode over 24 time slices of 20 ns is injected; from the 64
// serial links the testbench rebuilds, per slice, the fired X and Y strips
// and checks them against the track, and checks that every slice with hits
// on both sides is seen as a coincidence in the same slice on all chips,
// which needs the chips to sample in step.
`timescale 1ns / 1ps
module tb_prototype_2x256;
  import mimac_pkg::*;
  localparam int N_CHIPS = 8;
  logic clk_ref = 1'b0, rx_clk = 1'b1, rst_n = 1'b1, az = 1'b0;
  logic sc_clk = 1'b0, sc_run = 1'b0, sc_load = 1'b0;
  logic [N_CHIPS-1:0] sc_din = '0, sc_dout, clk_fast;
  real  i_strip [N_CHIPS][N_CH];
  logic [N_LINKS-1:0] ser_out [N_CHIPS];
  logic [N_CH-1:0]    ch_out [N_CHIPS];
  logic [2:0]         rx_phase = 3'd4;
  logic [N_LINKS-1:0][7:0] sr [N_CHIPS];
  logic [255:0] rx_x [int], rx_y [int], exp_x [int], exp_y [int];
  int   period = 0, checks = 0, failures = 0, n_coinc = 0;

  for (genvar i = 0; i < N_CHIPS; i++) begin : g_chip
    mimac_asic u_chip (
      .clk_ref(clk_ref), .rst_n(rst_n), .i_strip_na(i_strip[i]), .az_clk(az),
      .sc_clk(sc_clk), .sc_din(sc_din[i]), .sc_load(sc_load), .sc_dout(sc_dout[i]),
      .ser_out(ser_out[i]), .ch_out(ch_out[i]), .clk_fast(clk_fast[i]));
  end

  always #10   clk_ref = ~clk_ref;
  always #1.25 rx_clk  = ~rx_clk;
  always @(posedge rx_clk) rx_phase <= rx_phase + 3'd1;
  always @(posedge clk_ref) period <= period + 1;
  always #25   sc_clk = sc_run ? ~sc_clk : 1'b0;

  always @(negedge rx_clk) begin
    for (int i = 0; i < N_CHIPS; i++)
      for (int l = 0; l < N_LINKS; l++) sr[i][l] = {sr[i][l][6:0], ser_out[i][l]};
    if (rx_phase == 3'd7) begin
      rx_x[period] = {sr[3], sr[2], sr[1], sr[0]};
      rx_y[period] = {sr[7], sr[6], sr[5], sr[4]};
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic set_strips(input logic [255:0] x, input logic [255:0] y);
    for (int s = 0; s < 256; s++) begin
      i_strip[s / 64][s % 64]     = x[s] ? -430.0 : 0.0;
      i_strip[4 + s / 64][s % 64] = y[s] ? -430.0 : 0.0;
    end
  endtask

  initial begin
    asic_cfg_t cfg;
    set_strips('0, '0);
    #1  rst_n = 1'b0;
    #34 rst_n = 1'b1;
    az = 1'b1;
    #2000 az = 1'b0;
    cfg = '0;
    for (int c = 0; c < N_CH; c++) cfg.dac[c] = 5'd10;
    cfg.ch_enable = '1;
    // all eight chips configured in parallel, same value
    sc_run = 1'b1;
    for (int b = CFG_BITS - 1; b >= 0; b--) begin
      sc_din = {N_CHIPS{cfg[b]}};
      @(posedge sc_clk);
      #1;
    end
    sc_load = 1'b1;
    @(posedge sc_clk);
    #1 sc_load = 1'b0;
    sc_run = 1'b0;
    // PLLs lock during the 20 us configuration; wait a little more
    repeat (20) @(posedge clk_ref);
    // a track: X from strip 40 to 200, Y from 180 down to 60, 24 slices,
    // two or three strips wide (transverse diffusion)
    for (int k = 0; k < 30; k++) begin
      logic [255:0] x, y;
      int p0;
      #1 p0 = period;
      x = '0; y = '0;
      if (k >= 3 && k < 27) begin
        for (int w = 0; w < 2 + (k % 2); w++) begin
          x[40 + (k - 3) * 160 / 23 + w] = 1'b1;
          y[180 - (k - 3) * 120 / 23 - w] = 1'b1;
        end
      end
      #1 set_strips(x, y);
      exp_x[p0 + 2] = x;
      exp_y[p0 + 2] = y;
      @(posedge clk_ref);
    end
    set_strips('0, '0);
    repeat (3) @(posedge clk_ref);
    foreach (exp_x[p]) begin
      check(rx_x.exists(p) && rx_x[p] == exp_x[p], $sformatf("X strips of slice %0d", p));
      check(rx_y.exists(p) && rx_y[p] == exp_y[p], $sformatf("Y strips of slice %0d", p));
      if (rx_x[p] != '0 && rx_y[p] != '0) n_coinc++;
    end
    check(n_coinc == 24, $sformatf("24 coincidence slices, got %0d", n_coinc));
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

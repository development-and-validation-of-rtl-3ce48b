// tb_mimac_asic: end-to-end test of the whole 64 channel chip at its default
// parameters, with the PLL, the modelled channel offsets and the slow serial
// link, in the order a readout board would use it:
//  1. power up; with the offsets not yet corrected, some channels fire on
//     their offset alone;
//  2. auto-zero for 2 us, after which every channel is quiet;
//  3. write a configuration over the slow link (thresholds, enables with two
//     channels disabled, monostable setting, pattern mode);
//  4. once the PLL has locked, find the training pattern on all eight links
//     (word alignment search over the eight bit positions; it must be found
//     at the reference edge);
//  5. write the data-mode configuration and check that the previous one
//     comes back on sc_dout;
//  6. inject a recoil-like track, a few strips per 20 ns time slice plus
//     random hits and short pulses, and compare every received 64 bit slice
//     with a reference model, two reference periods after the slice.
// Mechanisms counted, each must occur: offset firing before auto-zero,
// pattern frames, data frames, hits removed by a disabled channel, short
// pulses stretched by the monostable, readback bits.
`timescale 1ns / 1ps
module tb_mimac_asic;
  import mimac_pkg::*;
  logic clk_ref = 1'b0, rx_clk = 1'b1, rst_n = 1'b1, az = 1'b0;
  logic sc_clk = 1'b0, sc_din = 1'b0, sc_load = 1'b0, sc_dout, clk_fast;
  real  i_strip [N_CH];
  logic [N_LINKS-1:0] ser_out;
  logic [N_CH-1:0]    ch_out;
  logic [2:0]         rx_phase = 3'd4;
  logic [N_LINKS-1:0][7:0]  sr;
  logic [N_LINKS-1:0][15:0] sr2;     // two frames per link, for the alignment search
  logic [N_CH-1:0]    rx [int];
  logic [N_CH-1:0]    expw [int];
  int   period = 0, checks = 0, failures = 0;
  int   n_offset_fired = 0, n_pattern_frames = 0, n_data_frames = 0;
  int   n_masked_hits = 0, n_short_pulses = 0, n_readback_bits = 0;
  asic_cfg_t cfg_a, cfg_b;
  logic [CFG_BITS-1:0] readback;

  mimac_asic dut (
    .clk_ref(clk_ref), .rst_n(rst_n), .i_strip_na(i_strip), .az_clk(az),
    .sc_clk(sc_clk), .sc_din(sc_din), .sc_load(sc_load), .sc_dout(sc_dout),
    .ser_out(ser_out), .ch_out(ch_out), .clk_fast(clk_fast));

  always #10   clk_ref = ~clk_ref;                    // 50 MHz, rising at 10 + 20k
  always #1.25 rx_clk  = ~rx_clk;                     // receiver's own 400 MHz
  always @(posedge rx_clk) rx_phase <= rx_phase + 3'd1;
  always @(posedge clk_ref) period <= period + 1;
  logic sc_run = 1'b0;                               // the slow clock runs only during a transfer
  always #25   sc_clk = sc_run ? ~sc_clk : 1'b0;      // 20 MHz slow link

  // receiver: one bit per slot at mid-bit, a word per reference period
  always @(negedge rx_clk) begin
    for (int l = 0; l < N_LINKS; l++) begin
      sr[l]  = {sr[l][6:0], ser_out[l]};
      sr2[l] = {sr2[l][14:0], ser_out[l]};
    end
    if (rx_phase == 3'd7) rx[period] = sr;            // link l = bits 8l+7..8l
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $realtime); end
  endtask

  task automatic set_hits(input logic [N_CH-1:0] h);
    for (int c = 0; c < N_CH; c++) i_strip[c] = h[c] ? -430.0 : 0.0;
  endtask

  // slow link: shift a configuration in (MSB first) and load it
  task automatic write_cfg(input asic_cfg_t v, output logic [CFG_BITS-1:0] out_bits);
    logic [CFG_BITS-1:0] b;
    b = v;
    // data and load change 1 ns after a rising edge of sc_clk
    sc_run = 1'b1;
    for (int i = CFG_BITS - 1; i >= 0; i--) begin
      out_bits[i] = sc_dout;
      sc_din      = b[i];
      @(posedge sc_clk);
      #1;
    end
    sc_load = 1'b1;
    @(posedge sc_clk);
    #1;
    sc_load = 1'b0;
    sc_run  = 1'b0;
  endtask

  initial begin
    logic [N_CH-1:0] track [int];
    set_hits('0);
    #1  rst_n = 1'b0;                     // power-on reset pulse
    #34 rst_n = 1'b1;
    // 1. offsets alone
    #200;
    for (int c = 0; c < N_CH; c++) if (ch_out[c]) n_offset_fired++;
    // 2. auto-zero
    az = 1'b1;
    #2000 az = 1'b0;
    #100;
    check(ch_out == '0, "all channels quiet after auto-zero");
    // 3. configuration A: pattern mode
    cfg_a = '0;
    for (int c = 0; c < N_CH; c++) cfg_a.dac[c] = 5'd10;
    cfg_a.ch_enable   = ~((64'h1 << 7) | (64'h1 << 40));
    cfg_a.mono_adjust = 3'd2;
    cfg_a.pattern_sel = 1'b1;
    cfg_a.pattern     = 16'h5AC3;
    write_cfg(cfg_a, readback);
    check(dut.u_sc.cfg == cfg_a, "configuration A loaded");
    // 4. training: the PLL has had > 20 us to lock
    repeat (10) @(posedge clk_ref);
    for (int f = 0; f < 20; f++) begin
      @(posedge clk_ref);
      #1;
      for (int l = 0; l < N_LINKS; l++) begin
        int found;
        logic [7:0] want;
        want  = (l % 2 == 0) ? cfg_a.pattern[7:0] : cfg_a.pattern[15:8];
        found = -1;
        for (int r = 7; r >= 0; r--)
          if (sr2[l][r +: 8] == want && found < 0) found = 8 - r;   // 8: at the edge
        check(found == 8 || (found >= 0 && want == {want[0], want[7:1]}),
              $sformatf("pattern on link %0d aligned to reference edge (found %0d)", l, found));
        n_pattern_frames++;
      end
    end
    // 5. configuration B: data mode, readback of A
    cfg_b = cfg_a;
    cfg_b.pattern_sel = 1'b0;
    write_cfg(cfg_b, readback);
    check(readback == CFG_BITS'(cfg_a), "readback of configuration A on sc_dout");
    n_readback_bits += CFG_BITS;
    // 6. a track: a diagonal band of strips moving one strip per slice on
    //    the X side (channels 0..31) and the Y side (32..63), plus noise
    repeat (3) @(posedge clk_ref);
    for (int k = 0; k < 120; k++) begin
      logic [N_CH-1:0] h;
      int p0;
      #1 p0 = period;
      h = '0;
      if (k < 40) begin
        for (int w = 0; w < 3; w++) begin
          h[(k / 2 + w) % 32]      = 1'b1;
          h[32 + (31 - k / 3 - w) % 32] = 1'b1;
        end
      end else begin
        h = {32'($urandom), 32'($urandom)};
      end
      #1;
      if (k % 6 == 5) begin
        set_hits('0);
        #9 set_hits(h);
        #5 set_hits('0);
        n_short_pulses++;
      end else begin
        set_hits(h);
      end
      n_masked_hits += int'(h[7]) + int'(h[40]);
      expw[p0 + 2] = h & cfg_b.ch_enable;
      @(posedge clk_ref);
    end
    set_hits('0);
    repeat (3) @(posedge clk_ref);
    foreach (expw[p]) begin
      check(rx.exists(p) && rx[p] == expw[p],
            $sformatf("slice in period %0d: got %h expected %h", p, rx[p], expw[p]));
      n_data_frames++;
    end
    $display("mechanisms: offset_fired=%0d pattern_frames=%0d data_frames=%0d masked_hits=%0d short_pulses=%0d readback_bits=%0d",
             n_offset_fired, n_pattern_frames, n_data_frames, n_masked_hits, n_short_pulses, n_readback_bits);
    check(n_offset_fired > 0,   "offset firing before auto-zero happened");
    check(n_pattern_frames > 0, "pattern frames happened");
    check(n_data_frames > 0,    "data frames happened");
    check(n_masked_hits > 0,    "masked hits happened");
    check(n_short_pulses > 0,   "short pulses happened");
    check(n_readback_bits > 0,  "readback happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_slow_control: checks the reset configuration, then shifts in two random
// configurations. The working configuration must not change while bits are
// shifted, must equal the shifted value after the load edge, and the bits
// leaving on sc_dout while the second value goes in must be the first value,
// most significant bit first (readback).
`timescale 1ns / 1ps
module tb_slow_control;
  import mimac_pkg::*;
  logic      sc_clk = 1'b0, rst_n = 1'b0, sc_din = 1'b0, sc_load = 1'b0, sc_dout;
  asic_cfg_t cfg, v1, v2, cfg_prev, expect_rst;
  logic [CFG_BITS-1:0] got;
  int        checks = 0, failures = 0;

  slow_control dut (.sc_clk(sc_clk), .rst_n(rst_n), .sc_din(sc_din), .sc_load(sc_load),
                    .sc_dout(sc_dout), .cfg(cfg));

  always #50 sc_clk = ~sc_clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic asic_cfg_t rand_cfg();
    logic [CFG_BITS-1:0] r;
    for (int i = 0; i < CFG_BITS; i++) r[i] = 1'($urandom);
    return asic_cfg_t'(r);
  endfunction

  // shift one value in, MSB first, collecting what leaves on sc_dout
  task automatic shift_in(input asic_cfg_t v, output logic [CFG_BITS-1:0] out_bits);
    logic [CFG_BITS-1:0] b;
    b = v;
    // called at a falling edge of sc_clk
    for (int i = CFG_BITS - 1; i >= 0; i--) begin
      out_bits[i] = sc_dout;
      sc_din      = b[i];
      @(negedge sc_clk);
    end
  endtask

  task automatic load();
    sc_load = 1'b1;
    @(negedge sc_clk);
    sc_load = 1'b0;
  endtask

  initial begin
    #120 rst_n = 1'b1;
    expect_rst = '0;
    for (int c = 0; c < N_CH; c++) expect_rst.dac[c] = 5'd31;
    check(cfg == expect_rst, "reset configuration");
    check(CFG_BITS == 404, "configuration length 404 bits");
    v1 = rand_cfg();
    v2 = rand_cfg();
    cfg_prev = cfg;
    @(negedge sc_clk);
    shift_in(v1, got);
    check(cfg == cfg_prev, "cfg unchanged while shifting");
    load();
    check(cfg == v1, "cfg equals first value after load");
    check(cfg.ch_enable == v1.ch_enable && cfg.dac[17] == v1.dac[17], "fields");
    shift_in(v2, got);
    check(got == CFG_BITS'(v1), "readback of first value on sc_dout");
    check(cfg == v1, "cfg holds first value until load");
    load();
    check(cfg == v2, "cfg equals second value after load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

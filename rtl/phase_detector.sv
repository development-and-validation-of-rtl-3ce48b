// phase_detector: behavioural model of the phase-frequency detector of the
// x8 PLL. It has three states: idle, up (a reference edge came first and
// waits for its divider edge) and dn (the divider edge came first). The
// edge that matches the pending one returns the detector to idle, so the
// width of an up or dn pulse is the phase error; a second edge of the same
// clock while one is pending keeps the state, which makes it detect
// frequency as well. The paper only names a phase detector; this tri-state
// behaviour is the usual one and is this design's choice. In silicon it is
// two flip-flops clearing each other through an AND gate; that zero-delay
// loop cannot be simulated reliably without gate delays, so it is modelled
// here as a state machine on the two clock edges. Coincident edges leave it
// idle whatever their order. rst_n low forces and holds idle.
`timescale 1ns / 1ps
module phase_detector (
  input  logic clk_ref,
  input  logic div_clk,
  input  logic rst_n,
  output logic up,
  output logic dn
);
  typedef enum logic [1:0] {PD_IDLE, PD_UP, PD_DN} pd_state_t;
  pd_state_t state = PD_IDLE;

  // One process per clock edge, both updating the shared state at once.
  always @(posedge clk_ref)
    if (rst_n) state = (state == PD_DN) ? PD_IDLE : PD_UP;

  always @(posedge div_clk)
    if (rst_n) state = (state == PD_UP) ? PD_IDLE : PD_DN;

  always @(negedge rst_n) state = PD_IDLE;

  assign up = (state == PD_UP);
  assign dn = (state == PD_DN);
endmodule

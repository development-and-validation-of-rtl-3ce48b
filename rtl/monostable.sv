// monostable: behavioural model of the programmable monostable that lengthens
// short comparator pulses. A rising edge of trig starts an output pulse of
// width MIN_NS + adjust * (MAX_NS - MIN_NS) / 7, i.e. 16 ns to 22 ns, the range
// printed in the paper's schematic next to the 3 bit adjust<2:0> input. The
// linear step between settings and the non-retriggerable behaviour (an edge
// during the pulse is ignored) are this model's assumptions.
`timescale 1ns / 1ps
module monostable #(
  parameter real MIN_NS   = 16.0,
  parameter real MAX_NS   = 22.0,
  parameter int  ADJ_BITS = 3
) (
  input  logic                trig,
  input  logic [ADJ_BITS-1:0] adjust,
  output logic                out
);
  localparam real STEP_NS = (MAX_NS - MIN_NS) / real'((1 << ADJ_BITS) - 1);

  initial out = 1'b0;

  always @(posedge trig) begin
    out <= 1'b1;
    #(MIN_NS + real'(adjust) * STEP_NS);
    out <= 1'b0;
  end
endmodule

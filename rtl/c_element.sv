// Two-input Muller C-element.
//
// The output goes to 1 when both inputs are 1, to 0 when both are 0, and keeps
// its last value while the inputs differ. This is the state-holding gate that
// the adder cells, the stage registers and the completion detector are built
// from; the physical cell is a 12-transistor custom gate. Here it is written
// as a latch that is set when both inputs are 1 and cleared when both are 0,
// which is the same next-state function y+ = a&b | y&(a|b). It has no reset:
// inside the adder cells both inputs are 0 whenever the inputs are spacer, so
// every instance settles to 0 before the first data word. The stage
// registers, which need a defined start state, use c_element_rst instead.
//
// Circuit warning: synthesis infers one latch per instance. That is the
// intended storage element of a C-element, not an accident of coding.
// A lint tool may add that it finds no latch in the always_latch block;
// the block does hold state (no assignment while a != b), so that note is a
// false alarm.
// Inside the handshaking stage the output is also reported as part of the
// stage's acknowledge loop, which is intended (see async_rca_stage).
module c_element (
  input  logic a,
  input  logic b,
  output logic y
);

  always_latch begin
    if (a & b)        y = 1'b1;
    else if (!(a | b)) y = 1'b0;
  end

endmodule

// Two-input Muller C-element with an asynchronous, active-high reset.
//
// Same function as c_element (output follows the inputs when they agree and
// holds otherwise); rst forces the stored value to 0, i.e. the spacer state of
// the rail it drives. The stage registers use it so that a stage powers up
// empty. The reset is this design's own addition: the source of the adder
// does not describe how the stage is initialised.
//
// Circuit warning: one latch per instance, which is the C-element's storage
// (Verilator's "no latch detected" note on it is a false alarm).
// Inside the handshaking stage the output is also reported as part of the
// stage's acknowledge loop, which is intended (see async_rca_stage).
module c_element_rst (
  input  logic rst,
  input  logic a,
  input  logic b,
  output logic y
);

  always_latch begin
    if (rst)               y = 1'b0;
    else if (a & b)        y = 1'b1;
    else if (!(a | b))     y = 1'b0;
  end

endmodule

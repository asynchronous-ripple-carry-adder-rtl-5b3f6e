// Completion detector for a dual-rail bus.
//
// One two-input OR per dual-rail pair tells whether that pair carries data;
// a tree of two-input C-elements (c_tree) joins the OR outputs. done rises
// only when every pair holds a code word and falls only when every pair is
// back to spacer, so it acknowledges complete data and complete spacer alike.
// This structure is the one the source describes. The default width, 65
// pairs, covers the two 32-bit operands and the carry in of the adder stage.
// Timing: no clock; done follows the last arriving (or leaving) pair.
module completion_detector
  import dr_pkg::*;
#(
  parameter int unsigned N = 65
) (
  input  dr_bit_t [N-1:0] d,
  output logic            done
);

  logic [N-1:0] pair_valid;

  always_comb begin
    for (int i = 0; i < N; i++) pair_valid[i] = d[i].r1 | d[i].r0;
  end

  c_tree #(.N(N)) u_tree (.in(pair_valid), .y(done));

endmodule

// Dual-rail (1-of-2) delay-insensitive code shared by every module of the
// adder stage.
//
// One binary bit X travels on two wires (X1, X0): X = 1 is (1,0), X = 0 is
// (0,1) and (0,0) is the spacer (null) that separates two data words under
// the 4-phase return-to-zero protocol. (1,1) is illegal. The struct keeps the
// rail names of the dual-rail literature: r1 is the "true" rail, r0 the
// "false" rail. The helper functions are used by the testbenches and by the
// completion logic description; they are plain combinational functions.
package dr_pkg;

  typedef struct packed {
    logic r1;  // asserted for binary 1
    logic r0;  // asserted for binary 0
  } dr_bit_t;


  // Encode a binary bit as a valid dual-rail code word.
  function automatic dr_bit_t dr_encode(input logic bit_val);
    dr_encode = '{r1: bit_val, r0: ~bit_val};
  endfunction

  // A pair carries data when exactly one rail is high.
  function automatic logic dr_is_data(input dr_bit_t d);
    dr_is_data = d.r1 ^ d.r0;
  endfunction

  function automatic logic dr_is_spacer(input dr_bit_t d);
    dr_is_spacer = ~(d.r1 | d.r0);
  endfunction

  function automatic logic dr_is_illegal(input dr_bit_t d);
    dr_is_illegal = d.r1 & d.r0;
  endfunction

endpackage

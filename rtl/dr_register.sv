// Dual-rail stage register (4-phase return-to-zero).
//
// Every rail passes through a C-element whose second input is the stage's
// ackin: q = C(d, ackin). With ackin high (the next stage has finished its
// spacer and wants data) rising data rails pass and are then held; with ackin
// low (the next stage has accepted the word) falling rails pass, so the
// register returns to spacer only after the successor has acknowledged. This
// is the usual C-element register of dual-rail pipelines; the source states
// only that its registers are made of two-input C-elements, so the exact cell
// and the active-high asynchronous reset (which empties the register to
// spacer) are this design's choice. Default width: 65 pairs (32 + 32 operand
// bits and the carry in). No clock.
module dr_register
  import dr_pkg::*;
#(
  parameter int unsigned N = 65
) (
  input  logic            rst,
  input  logic            ackin,
  input  dr_bit_t [N-1:0] d,
  output dr_bit_t [N-1:0] q
);

  for (genvar i = 0; i < N; i++) begin : g_bit
    c_element_rst u_r1 (.rst(rst), .a(d[i].r1), .b(ackin), .y(q[i].r1));
    c_element_rst u_r0 (.rst(rst), .a(d[i].r0), .b(ackin), .y(q[i].r0));
  end

endmodule

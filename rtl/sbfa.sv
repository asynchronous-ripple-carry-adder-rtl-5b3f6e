// Early output dual-rail single-bit full adder (SBFA) with implicit logic
// redundancy.
//
// Adds the dual-rail bits a, b and the dual-rail carry cin. The cell follows
// the published gate-level circuit: two AO22 complex gates detect whether the
// operand rails are "equal" (CG1 = A0B0 + A1B1) or "different"
// (CG2 = A0B1 + A1B0); four C-elements pair those with the carry rails and two
// OR gates form the sum rails; two more AO22 gates form the carry rails
//   COUT1 = A1B1 + CG2 & CIN1      COUT0 = A0B0 + CG2 & CIN0.
// The products A1B1 and A0B0 appear both in CG1 and in CG3/CG4, which is the
// "implicit redundancy": the carry output can be produced as soon as a and b
// generate or kill a carry, before cin has arrived (early set), and it returns
// to spacer as soon as a or b returns to spacer (early reset). The sum needs
// all three inputs. The logic equations are the disjoint sum-of-products
//   SUM1  = A0B0CIN1 + A0B1CIN0 + A1B0CIN0 + A1B1CIN1
//   SUM0  = A0B0CIN0 + A0B1CIN1 + A1B0CIN1 + A1B1CIN0
//   COUT1 = A0B1CIN1 + A1B0CIN1 + A1B1CIN0 + A1B1CIN1
//   COUT0 = A0B0CIN0 + A0B0CIN1 + A0B1CIN0 + A1B0CIN0.
// Timing: there is no clock; outputs follow inputs after the gate delays.
// Everything here follows the source circuit; only the SystemVerilog
// rendering is this design's.
module sbfa
  import dr_pkg::*;
(
  input  dr_bit_t a,
  input  dr_bit_t b,
  input  dr_bit_t cin,
  output dr_bit_t sum,
  output dr_bit_t cout
);

  logic cg1, cg2;              // AO22: operands equal / operands different
  logic c_eq_c0, c_eq_c1;      // C(CG1, CIN0), C(CG1, CIN1)
  logic c_ne_c0, c_ne_c1;      // C(CG2, CIN0), C(CG2, CIN1)

  assign cg1 = (a.r0 & b.r0) | (a.r1 & b.r1);
  assign cg2 = (a.r0 & b.r1) | (a.r1 & b.r0);

  c_element u_c_eq_c0 (.a(cg1), .b(cin.r0), .y(c_eq_c0));
  c_element u_c_eq_c1 (.a(cg1), .b(cin.r1), .y(c_eq_c1));
  c_element u_c_ne_c0 (.a(cg2), .b(cin.r0), .y(c_ne_c0));
  c_element u_c_ne_c1 (.a(cg2), .b(cin.r1), .y(c_ne_c1));

  assign sum.r1  = c_eq_c1 | c_ne_c0;
  assign sum.r0  = c_eq_c0 | c_ne_c1;

  // CG3 and CG4
  assign cout.r1 = (a.r1 & b.r1) | (cg2 & cin.r1);
  assign cout.r0 = (a.r0 & b.r0) | (cg2 & cin.r0);

endmodule

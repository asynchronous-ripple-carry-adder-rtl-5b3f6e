// Area optimized early output dual-rail dual-bit full adder (DBFA).
//
// Adds two 2-bit dual-rail operands a[1:0], b[1:0] and a dual-rail carry cin,
// giving a 2-bit dual-rail sum and a dual-rail carry out. Rail names of the
// source map as A11/A10 = a[1].r1/a[1].r0, A01/A00 = a[0].r1/a[0].r0 (same for
// B), CIN1/CIN0 = cin, SUM11/SUM10 = sum[1], SUM01/SUM00 = sum[0],
// COUT21/COUT20 = cout.
//
// How it works. For each bit position i the operand rails are first reduced
// to three mutually exclusive 1-hot signals: kill k_i = Ai0&Bi0, generate
// g_i = Ai1&Bi1 and propagate p_i = Ai1&Bi0 | Ai0&Bi1 (an AO22), with
// e_i = k_i | g_i ("equal") and v_i = e_i | p_i ("bit pair arrived").
//   * Low sum bit: SUM01 = C(p0,CIN0) | C(e0,CIN1),
//                  SUM00 = C(e0,CIN0) | C(p0,CIN1).
//   * Internal carry into bit 1: c1_1 = g0 | p0&CIN1, c1_0 = k0 | p0&CIN0.
//   * High sum bit: ISUM11 = c1_0&p1 | c1_1&e1, ISUM10 = c1_0&e1 | c1_1&p1,
//     each passed through a C-element with a "done" signal
//     done = C( C(v0, v1), c1_1 | c1_0 ), so the high sum rails rise only when
//     all four operand pairs and the internal carry are present.
//   * Carry out: COUT21 = p1&p0&CIN1 | (p1&g0 | g1),
//                COUT20 = p1&p0&CIN0 | (p1&k0 | k1).
//     A generate or kill in bit 1, or bit 1 propagating a generate/kill of
//     bit 0, produces the carry out before cin arrives (early set); the carry
//     goes back to spacer as soon as the operands do, whatever cin is doing
//     (early reset). In a middle position of a ripple adder the carry path
//     from cin to cout is a single AO21 gate.
// These are the disjoint sum-of-products equations (5)-(10) of the source,
// factorized; the testbench checks the cell against those equations for every
// input word and every order of arrival of the five input pairs.
//
// What follows the source and what does not: the k/g/p/e/v decomposition,
// the sum circuits, the two-level C-element "done" tree and the carry-out
// gates follow the published gate-level drawing. The drawn gates for the
// carry-0 rail into bit 1 could not be read unambiguously; c1_0 is written as
// the AO21 dual of c1_1 so that it implements equations (5) and (6).
// Timing: combinational/state-holding logic without a clock.
// Circuit warnings: eight latches (the C-elements). Inside the handshaking
// stage, lint also lists nets of this cell as part of a combinational loop;
// that loop is the stage's acknowledge path (see async_rca_stage) and passes
// through this cell, it is not a loop inside the cell.
module dbfa
  import dr_pkg::*;
(
  input  dr_bit_t [1:0] a,
  input  dr_bit_t [1:0] b,
  input  dr_bit_t       cin,
  output dr_bit_t [1:0] sum,
  output dr_bit_t       cout
);

  logic k0, g0, p0, e0, v0;
  logic k1, g1, p1, e1, v1;
  logic s0_p_c0, s0_e_c1, s0_e_c0, s0_p_c1;
  logic c1_1, c1_0, c1_v;
  logic ab_done, done;
  logic isum11, isum10;
  logic pp;

  // bit 0 operand decode
  assign k0 = a[0].r0 & b[0].r0;
  assign g0 = a[0].r1 & b[0].r1;
  assign p0 = (a[0].r1 & b[0].r0) | (a[0].r0 & b[0].r1);
  assign e0 = k0 | g0;
  assign v0 = e0 | p0;

  // bit 1 operand decode
  assign k1 = a[1].r0 & b[1].r0;
  assign g1 = a[1].r1 & b[1].r1;
  assign p1 = (a[1].r1 & b[1].r0) | (a[1].r0 & b[1].r1);
  assign e1 = k1 | g1;
  assign v1 = e1 | p1;

  // low sum bit
  c_element u_s0_p_c0 (.a(p0), .b(cin.r0), .y(s0_p_c0));
  c_element u_s0_e_c1 (.a(e0), .b(cin.r1), .y(s0_e_c1));
  c_element u_s0_e_c0 (.a(e0), .b(cin.r0), .y(s0_e_c0));
  c_element u_s0_p_c1 (.a(p0), .b(cin.r1), .y(s0_p_c1));
  assign sum[0].r1 = s0_p_c0 | s0_e_c1;
  assign sum[0].r0 = s0_e_c0 | s0_p_c1;

  // internal carry from bit 0 into bit 1
  assign c1_1 = g0 | (p0 & cin.r1);
  assign c1_0 = k0 | (p0 & cin.r0);
  assign c1_v = c1_1 | c1_0;

  // completion of the operands and of the internal carry
  c_element u_ab_done (.a(v0),      .b(v1),   .y(ab_done));
  c_element u_done    (.a(ab_done), .b(c1_v), .y(done));

  // high sum bit
  assign isum11 = (c1_0 & p1) | (c1_1 & e1);
  assign isum10 = (c1_0 & e1) | (c1_1 & p1);
  c_element u_sum11 (.a(isum11), .b(done), .y(sum[1].r1));
  c_element u_sum10 (.a(isum10), .b(done), .y(sum[1].r0));

  // carry out
  assign pp      = p1 & p0;
  assign cout.r1 = (pp & cin.r1) | ((p1 & g0) | g1);
  assign cout.r0 = (pp & cin.r0) | ((p1 & k0) | k1);

endmodule

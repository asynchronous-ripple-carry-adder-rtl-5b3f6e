// Dual-rail early output asynchronous ripple carry adder built from SBFAs
// and DBFAs.
//
// The NUM_SBFA least significant bit positions use single-bit adders (sbfa),
// the remaining WIDTH-NUM_SBFA positions use dual-bit adders (dbfa), two bits
// per cell, so the carry ripples through NUM_SBFA + (WIDTH-NUM_SBFA)/2 cells
// instead of WIDTH. The default, WIDTH = 32 with NUM_SBFA = 2, is the proposed
// configuration: 2 SBFAs at bits 0 and 1, then 15 DBFAs for bits 2..31.
// Putting SBFAs at the bottom avoids the longer path (AO22, AND, AO21) that a
// DBFA sees when its own operands, not the carry, arrive last; in a middle
// position a DBFA adds only one AO21 to the carry path. NUM_SBFA = 0 gives the
// all-DBFA adder and NUM_SBFA = 4 the 14-DBFA variant that the source also
// measures; WIDTH - NUM_SBFA must be even.
//
// Interface: a, b and sum are dual-rail words (bit i in element i), cin/cout
// the dual-rail carry. All follow the 4-phase return-to-zero protocol: the
// adder is a pure function block with no handshake of its own; its outputs
// become data after the inputs become data and return to spacer after the
// inputs return to spacer. No clock.
module async_rca
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH    = 32,
  parameter int unsigned NUM_SBFA = 2
) (
  input  dr_bit_t [WIDTH-1:0] a,
  input  dr_bit_t [WIDTH-1:0] b,
  input  dr_bit_t             cin,
  output dr_bit_t [WIDTH-1:0] sum,
  output dr_bit_t             cout
);

  localparam int unsigned NUM_DBFA = (WIDTH - NUM_SBFA) / 2;

  // carry[i] is the carry into bit position i
  dr_bit_t carry [WIDTH+1];

  if (NUM_SBFA > WIDTH || ((WIDTH - NUM_SBFA) % 2) != 0) begin : g_bad_split
    $error("async_rca: WIDTH - NUM_SBFA must be even and not negative");
  end

  assign carry[0] = cin;

  for (genvar i = 0; i < NUM_SBFA; i++) begin : g_sbfa
    sbfa u_sbfa (
      .a   (a[i]),
      .b   (b[i]),
      .cin (carry[i]),
      .sum (sum[i]),
      .cout(carry[i+1])
    );
  end

  for (genvar j = 0; j < NUM_DBFA; j++) begin : g_dbfa
    localparam int unsigned LSB = NUM_SBFA + 2 * j;
    dbfa u_dbfa (
      .a   (a[LSB+1:LSB]),
      .b   (b[LSB+1:LSB]),
      .cin (carry[LSB]),
      .sum (sum[LSB+1:LSB]),
      .cout(carry[LSB+2])
    );
  end

  assign cout = carry[WIDTH];

endmodule

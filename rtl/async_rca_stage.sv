// Asynchronous circuit stage around the 32-bit early output dual-rail ripple
// carry adder: input register, completion detector, adder, next stage
// register and its completion detector, connected for 4-phase return-to-zero
// handshaking.
//
// Data path: the dual-rail operands a, b and carry cin enter the current
// stage register, whose outputs feed both the adder (async_rca, 2 SBFAs and
// 15 DBFAs by default) and a completion detector. The adder's sum and carry
// out go into the next stage register, which has a completion detector of its
// own; the next stage register's outputs are the stage's outputs sum/cout.
//
// Handshake (each ack is inverted where it enters a register, so ackin = not
// ackout):
//   * ackout (output) is the input completion detector: high once the input
//     register holds a full code word, low once it is all spacer. The
//     transmitter sends data while ackout is low, spacer after it goes high.
//   * the input register's ackin is the inverted completion signal of the
//     next stage register, so the input register can take new data only after
//     the result of the previous word has been taken and cleared.
//   * rx_ackout (input) is the receiver's acknowledge: the receiver raises it
//     after it has taken sum/cout and lowers it after they have returned to
//     spacer. The next stage register's ackin is its inverse.
// rst (active high, asynchronous) empties both registers to spacer; it must
// be held while the inputs are spacer and rx_ackout is low.
//
// Timing assumption (relative timing of the early output adder): data may
// arrive with any skew, but in the return-to-zero phase all operand pairs
// a[31:0], b[31:0] must go to spacer together, i.e. within less time than
// the loop adder -> next stage register -> completion detector -> input
// register takes. The carry in may lag the operands by any amount. The reason
// is early reset: the adder can return every output to spacer while some
// operand pairs are still data (only the bit-0 sum waits for the carry in),
// the next stage register then empties, the input register's ackin rises,
// and an operand rail that is still held in the input register could then
// no longer be cleared. A transmitter that resets the whole bus at once, as
// the 4-phase protocol prescribes, meets the assumption.
//
// The arrangement follows the stage diagram of the source; the reset, the
// placement of the inverters at the register inputs and the choice of
// registering the adder outputs inside this module are this design's own.
//
// Circuit warning: the handshake closes a loop input register -> adder ->
// next stage register -> completion detector -> input register ackin. That
// loop is the asynchronous pipeline's control path and is meant to be there;
// it is broken in time by the C-elements, which hold their state.
module async_rca_stage
  import dr_pkg::*;
#(
  parameter int unsigned WIDTH    = 32,
  parameter int unsigned NUM_SBFA = 2
) (
  input  logic                rst,
  input  dr_bit_t [WIDTH-1:0] a,
  input  dr_bit_t [WIDTH-1:0] b,
  input  dr_bit_t             cin,
  output logic                ackout,
  output dr_bit_t [WIDTH-1:0] sum,
  output dr_bit_t             cout,
  input  logic                rx_ackout
);

  localparam int unsigned NIN  = 2 * WIDTH + 1;
  localparam int unsigned NOUT = WIDTH + 1;

  dr_bit_t [NIN-1:0]  in_d, in_q;
  dr_bit_t [NOUT-1:0] out_d, out_q;
  dr_bit_t [WIDTH-1:0] rca_sum;
  dr_bit_t             rca_cout;
  logic                out_done;

  assign in_d = {cin, b, a};

  dr_register #(.N(NIN)) u_in_reg (
    .rst  (rst),
    .ackin(~out_done),
    .d    (in_d),
    .q    (in_q)
  );

  completion_detector #(.N(NIN)) u_in_cd (
    .d   (in_q),
    .done(ackout)
  );

  async_rca #(.WIDTH(WIDTH), .NUM_SBFA(NUM_SBFA)) u_rca (
    .a   (in_q[WIDTH-1:0]),
    .b   (in_q[2*WIDTH-1:WIDTH]),
    .cin (in_q[2*WIDTH]),
    .sum (rca_sum),
    .cout(rca_cout)
  );

  assign out_d = {rca_cout, rca_sum};

  dr_register #(.N(NOUT)) u_out_reg (
    .rst  (rst),
    .ackin(~rx_ackout),
    .d    (out_d),
    .q    (out_q)
  );

  completion_detector #(.N(NOUT)) u_out_cd (
    .d   (out_q),
    .done(out_done)
  );

  assign sum  = out_q[WIDTH-1:0];
  assign cout = out_q[WIDTH];

endmodule

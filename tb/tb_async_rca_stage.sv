// End-to-end testbench for the asynchronous adder stage at its default size
// (32 bits, 2 SBFAs + 15 DBFAs, no parameter overrides).
//
// A transmitter process sends NWORDS random operand words (a, b, cin) under
// the 4-phase return-to-zero protocol: it drives the 65 input pairs one at a
// time in random order while ackout is low, waits for ackout to rise, returns
// all operand pairs to spacer together and the carry in one to four time
// units later, and waits for ackout to fall. (Spacer on the operands must not
// be skewed: see the timing assumption in async_rca_stage.) A receiver
// process waits for a complete code word on sum/cout, compares it with
// a + b + cin, raises rx_ackout after a random delay, waits for spacer and
// lowers rx_ackout after another random delay. Some delays are long, so the
// stage must hold a finished word and block the next one.
//
// A monitor samples between the driving edges and checks: no illegal code
// words; ackout low while any input pair is still missing and high while any
// is still present (completion detection); outputs unchanged while a complete
// word waits for rx_ackout; words received equal words sent, in order. It
// counts how often each mechanism of the design occurred and fails if one
// never did: a completed 4-phase transaction, early set (an output pair
// becomes data before the transmitter has driven its last input pair), early
// reset (an output pair returns to spacer while the carry in is still
// data), and a stall (a complete input word held off by the input register
// because the previous result had not yet been acknowledged).
module tb_async_rca_stage;
  import dr_pkg::*;

  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned W      = 32;
  localparam int unsigned NIN    = 2 * W + 1;
  localparam int          NWORDS = 1000;

  logic            rst;
  dr_bit_t [W-1:0] a, b, sum;
  dr_bit_t         cin, cout;
  logic            ackout, rx_ackout;

  async_rca_stage dut (
    .rst(rst), .a(a), .b(b), .cin(cin), .ackout(ackout),
    .sum(sum), .cout(cout), .rx_ackout(rx_ackout)
  );

  int checks   = 0;
  int failures = 0;
  int n_sent = 0, n_received = 0;
  int n_early_set = 0, n_early_reset = 0, n_stall = 0;

  // transmitter state, read by the monitor
  typedef enum logic [1:0] {TX_IDLE, TX_DATA, TX_SPACER} tx_phase_e;
  tx_phase_e tx_phase = TX_IDLE;
  int        tx_driven = 0;     // input pairs currently carrying data
  logic [W:0] expected [$];

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t %s", $time, msg);
    end
  endtask

  function automatic logic out_complete();
    for (int k = 0; k < W; k++) if (!dr_is_data(sum[k])) return 1'b0;
    return dr_is_data(cout);
  endfunction

  function automatic logic out_empty();
    return (sum == '0) && (cout == '0);
  endfunction

  task automatic set_pair(input int idx, input dr_bit_t v);
    if (idx < W)          a[idx] = v;
    else if (idx < 2 * W) b[idx - W] = v;
    else                  cin = v;
  endtask

  task automatic shuffle(ref int order [NIN]);
    for (int i = NIN - 1; i > 0; i--) begin
      int j, t;
      j = $urandom_range(i, 0);
      t = order[i]; order[i] = order[j]; order[j] = t;
    end
  endtask

  function automatic int rand_delay();
    // mostly short, sometimes long enough to hold off the next word
    return ($urandom_range(9, 0) < 7) ? $urandom_range(2, 0) : $urandom_range(150, 20);
  endfunction

  // watchdog
  initial begin
    #(NWORDS * 1000 + 10000);
    failures++;
    $display("FAIL watchdog expired: sent %0d received %0d", n_sent, n_received);
    $display("ackout=%b rx_ackout=%b tx_phase=%s driven=%0d in_q=%h out_q=%h out_done=%b",
             ackout, rx_ackout, tx_phase.name(), tx_driven, dut.in_q, dut.out_q, dut.out_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // transmitter
  initial begin
    int         order [NIN];
    dr_bit_t    val [NIN];
    rst = 1'b1; a = '0; b = '0; cin = '0;
    #5 rst = 1'b0;
    #1;
    for (int n = 0; n < NWORDS; n++) begin
      logic [W-1:0] xa, xb;
      logic         xc;
      int           waited;
      case (n)
        0: begin xa = '1; xb = '0; xc = 1'b1; end
        1: begin xa = '1; xb = '1; xc = 1'b1; end
        2: begin xa = '0; xb = '0; xc = 1'b0; end
        default: begin xa = $urandom; xb = $urandom; xc = 1'($urandom); end
      endcase
      while (ackout) #1;
      expected.push_back({1'b0, xa} + {1'b0, xb} + {{W{1'b0}}, xc});
      for (int i = 0; i < W; i++) begin
        val[i]     = dr_encode(xa[i]);
        val[W + i] = dr_encode(xb[i]);
      end
      val[2 * W] = dr_encode(xc);
      for (int i = 0; i < NIN; i++) order[i] = i;
      shuffle(order);
      tx_phase = TX_DATA;
      for (int s = 0; s < NIN; s++) begin
        set_pair(order[s], val[order[s]]);
        tx_driven = s + 1;
        #1;
      end
      waited = 0;
      while (!ackout) begin
        #1;
        waited++;
      end
      if (waited > 0) n_stall++;
      // spacer: all operand pairs at once, the carry in a few steps later
      tx_phase = TX_SPACER;
      a = '0;
      b = '0;
      tx_driven = 1;
      repeat ($urandom_range(4, 1)) #1;
      cin = '0;
      tx_driven = 0;
      #1;
      while (ackout) #1;
      tx_phase = TX_IDLE;
      n_sent++;
    end
  end

  // receiver
  initial begin
    rx_ackout = 1'b0;
    #6;
    while (n_received < NWORDS) begin
      logic [W:0] got, exp;
      while (!out_complete()) #1;
      for (int k = 0; k < W; k++) got[k] = sum[k].r1;
      got[W] = cout.r1;
      check(expected.size() > 0, "result without a pending word");
      exp = (expected.size() > 0) ? expected.pop_front() : '0;
      check(got == exp, $sformatf("word %0d: got %h expected %h", n_received, got, exp));
      n_received++;
      repeat (rand_delay()) #1;
      rx_ackout = 1'b1;
      while (!out_empty()) #1;
      repeat (rand_delay()) #1;
      rx_ackout = 1'b0;
    end
    #20;
    check(n_sent == NWORDS && n_received == NWORDS, "not every word went through");
    check(n_received > 0,    "no 4-phase transaction completed");
    check(n_early_set > 0,   "early set never happened");
    check(n_early_reset > 0, "early reset never happened");
    check(n_stall > 0,       "input never stalled");
    $display("transactions %0d, early set %0d, early reset %0d, stalls %0d",
             n_received, n_early_set, n_early_reset, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor, half a time unit after the drivers
  initial begin
    dr_bit_t [W:0] prev_out, cur_out;
    logic          held;
    prev_out = '0;
    #6.5;
    forever begin
      cur_out = {cout, sum};
      for (int k = 0; k <= W; k++) begin
        check(!dr_is_illegal(cur_out[k]), $sformatf("illegal code on output %0d", k));
        if (tx_phase == TX_DATA && tx_driven < NIN &&
            !dr_is_data(prev_out[k]) && dr_is_data(cur_out[k]))
          n_early_set++;
        if (tx_phase == TX_SPACER && tx_driven > 0 &&
            dr_is_data(prev_out[k]) && dr_is_spacer(cur_out[k]))
          n_early_reset++;
      end
      if (tx_phase == TX_DATA && tx_driven < NIN)
        check(!ackout, "ackout high before every input pair arrived");
      if (tx_phase == TX_SPACER && tx_driven > 0)
        check(ackout, "ackout low before every input pair left");
      held = 1'b1;
      for (int k = 0; k <= W; k++) if (!dr_is_data(prev_out[k])) held = 1'b0;
      if (held && !rx_ackout)
        check(cur_out == prev_out, "complete word changed before it was acknowledged");
      prev_out = cur_out;
      #1;
    end
  end

endmodule

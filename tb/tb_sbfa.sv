// Self-checking testbench for the early output dual-rail single-bit full
// adder.
//
// For each of the 8 input words it runs many 4-phase transactions: starting
// from spacer, the three input pairs (a, b, cin) arrive one at a time in a
// random order, then return to spacer one at a time in a random order. After
// every step it checks that
//   * no output pair is illegal (both rails high);
//   * in the data phase output rails only rise, in the spacer phase only fall;
//   * any output pair that is data already carries the correct value;
//   * once all inputs are data, the outputs equal the published sum-of-
//     products equations (typed in below) and the arithmetic result;
//   * the carry out is data as soon as a and b generate or kill (early set)
//     and spacer as soon as a or b is spacer (early reset), whatever cin is;
//   * all outputs are spacer once all inputs are spacer.
module tb_sbfa;
  import dr_pkg::*;

  dr_bit_t a, b, cin, sum, cout;
  int checks   = 0;
  int failures = 0;
  int early_set_seen   = 0;
  int early_reset_seen = 0;

  sbfa dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (a=%b b=%b cin=%b sum=%b cout=%b)", msg, a, b, cin, sum, cout);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dr_bit_t prev_sum, prev_cout;
    dr_bit_t val [3];
    int      order [3];
    a = '0; b = '0; cin = '0;
    #1;
    for (int round = 0; round < 40; round++) begin
      for (int w = 0; w < 8; w++) begin
        logic xa, xb, xc, s_exp, c_exp;
        logic e_s1, e_s0, e_c1, e_c0;
        {xa, xb, xc} = 3'(w);
        {c_exp, s_exp} = 2'(xa + xb + xc);
        val[0] = dr_encode(xa); val[1] = dr_encode(xb); val[2] = dr_encode(xc);
        for (int i = 0; i < 3; i++) order[i] = i;
        for (int i = 2; i > 0; i--) begin
          int j, t;
          j = $urandom_range(i, 0);
          t = order[i]; order[i] = order[j]; order[j] = t;
        end
        // data phase
        for (int s = 0; s < 3; s++) begin
          prev_sum = sum; prev_cout = cout;
          case (order[s])
            0: a   = val[0];
            1: b   = val[1];
            default: cin = val[2];
          endcase
          #1;
          check(!dr_is_illegal(sum) && !dr_is_illegal(cout), "illegal output code");
          check(((prev_sum & ~sum) == '0) && ((prev_cout & ~cout) == '0),
                "output rail fell during data phase");
          if (dr_is_data(sum))  check(sum.r1 == s_exp, "wrong early sum");
          if (dr_is_data(cout)) check(cout.r1 == c_exp, "wrong early carry");
          if (dr_is_data(a) && dr_is_data(b) && (xa == xb)) begin
            check(dr_is_data(cout), "carry not produced early on generate/kill");
            if (dr_is_spacer(cin)) early_set_seen++;
          end
        end
        // equations (1)-(4) with every input present
        e_s1 = a.r0&b.r0&cin.r1 | a.r0&b.r1&cin.r0 | a.r1&b.r0&cin.r0 | a.r1&b.r1&cin.r1;
        e_s0 = a.r0&b.r0&cin.r0 | a.r0&b.r1&cin.r1 | a.r1&b.r0&cin.r1 | a.r1&b.r1&cin.r0;
        e_c1 = a.r0&b.r1&cin.r1 | a.r1&b.r0&cin.r1 | a.r1&b.r1&cin.r0 | a.r1&b.r1&cin.r1;
        e_c0 = a.r0&b.r0&cin.r0 | a.r0&b.r0&cin.r1 | a.r0&b.r1&cin.r0 | a.r1&b.r0&cin.r0;
        check(sum == '{r1: e_s1, r0: e_s0}, "sum differs from equations (1),(2)");
        check(cout == '{r1: e_c1, r0: e_c0}, "carry differs from equations (3),(4)");
        check(sum == dr_encode(s_exp) && cout == dr_encode(c_exp), "wrong sum/carry");
        // spacer phase in a fresh random order
        for (int i = 2; i > 0; i--) begin
          int j, t;
          j = $urandom_range(i, 0);
          t = order[i]; order[i] = order[j]; order[j] = t;
        end
        for (int s = 0; s < 3; s++) begin
          prev_sum = sum; prev_cout = cout;
          case (order[s])
            0: a   = '0;
            1: b   = '0;
            default: cin = '0;
          endcase
          #1;
          check(!dr_is_illegal(sum) && !dr_is_illegal(cout), "illegal output code");
          check(((~prev_sum & sum) == '0) && ((~prev_cout & cout) == '0),
                "output rail rose during spacer phase");
          if (dr_is_spacer(a) || dr_is_spacer(b)) begin
            check(dr_is_spacer(cout), "carry not reset early");
            if (dr_is_data(cin)) early_reset_seen++;
          end
        end
        check(dr_is_spacer(sum) && dr_is_spacer(cout), "outputs not spacer after spacer");
      end
    end
    check(early_set_seen > 0, "early set never exercised");
    check(early_reset_seen > 0, "early reset never exercised");
    $display("early set events %0d, early reset events %0d", early_set_seen, early_reset_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

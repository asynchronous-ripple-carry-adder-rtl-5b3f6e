// Self-checking testbench for the early output dual-rail dual-bit full adder.
//
// All 32 input words (2-bit a, 2-bit b, carry in) are run through many
// 4-phase transactions in which the five input pairs arrive, and later leave,
// one at a time in random order. After every step the testbench checks
//   * no illegal output code, monotonic rails (rise in data phase, fall in
//     spacer phase), and that any output pair already present is correct;
//   * early set of the carry: cout is data as soon as bit 1 generates or
//     kills, or bit 1 propagates while bit 0 generates or kills;
//   * the high sum bit waits for all four operand pairs;
//   * early reset: once all operand pairs are spacer, cout and the high sum
//     bit are spacer even if cin is still data;
//   * with every input present, the outputs equal equations (5)-(10) typed in
//     below and the arithmetic sum a + b + cin.
module tb_dbfa;
  import dr_pkg::*;

  dr_bit_t [1:0] a, b, sum;
  dr_bit_t       cin, cout;
  int checks   = 0;
  int failures = 0;
  int early_set_seen   = 0;
  int early_reset_seen = 0;

  dbfa dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (a=%b b=%b cin=%b sum=%b cout=%b)", msg, a, b, cin, sum, cout);
    end
  endtask

  function automatic logic all_ab_data();
    return dr_is_data(a[0]) && dr_is_data(a[1]) && dr_is_data(b[0]) && dr_is_data(b[1]);
  endfunction

  function automatic logic all_ab_spacer();
    return dr_is_spacer(a[0]) && dr_is_spacer(a[1]) && dr_is_spacer(b[0]) && dr_is_spacer(b[1]);
  endfunction

  task automatic set_pair(input int idx, input dr_bit_t v);
    case (idx)
      0: a[0] = v;
      1: a[1] = v;
      2: b[0] = v;
      3: b[1] = v;
      default: cin = v;
    endcase
  endtask

  task automatic shuffle(ref int order [5]);
    for (int i = 4; i > 0; i--) begin
      int j, t;
      j = $urandom_range(i, 0);
      t = order[i]; order[i] = order[j]; order[j] = t;
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dr_bit_t [1:0] prev_sum;
    dr_bit_t       prev_cout;
    dr_bit_t       val [5];
    int            order [5];
    a = '0; b = '0; cin = '0;
    #1;
    for (int round = 0; round < 40; round++) begin
      for (int w = 0; w < 32; w++) begin
        logic [1:0] xa, xb, s_exp;
        logic       xc, c_exp;
        logic A11, A10, A01, A00, B11, B10, B01, B00, CIN1, CIN0;
        logic SUM11, SUM10, SUM01, SUM00, COUT21, COUT20;
        {xa, xb, xc} = 5'(w);
        {c_exp, s_exp} = 3'(xa + xb + xc);
        val[0] = dr_encode(xa[0]); val[1] = dr_encode(xa[1]);
        val[2] = dr_encode(xb[0]); val[3] = dr_encode(xb[1]);
        val[4] = dr_encode(xc);
        for (int i = 0; i < 5; i++) order[i] = i;
        shuffle(order);
        // data phase
        for (int s = 0; s < 5; s++) begin
          prev_sum = sum; prev_cout = cout;
          set_pair(order[s], val[order[s]]);
          #1;
          check(!dr_is_illegal(sum[0]) && !dr_is_illegal(sum[1]) && !dr_is_illegal(cout),
                "illegal output code");
          check(((prev_sum & ~sum) == '0) && ((prev_cout & ~cout) == '0),
                "output rail fell during data phase");
          if (dr_is_data(sum[0])) check(sum[0].r1 == s_exp[0], "wrong early sum bit 0");
          if (dr_is_data(sum[1])) check(sum[1].r1 == s_exp[1], "wrong early sum bit 1");
          if (dr_is_data(cout))   check(cout.r1 == c_exp, "wrong early carry");
          if (!all_ab_data()) check(dr_is_spacer(sum[1]), "high sum bit before all operands");
          if (dr_is_data(a[1]) && dr_is_data(b[1])) begin
            logic early;
            early = (xa[1] == xb[1]) ||
                    (dr_is_data(a[0]) && dr_is_data(b[0]) && xa[0] == xb[0]);
            if (early) begin
              check(dr_is_data(cout), "carry out not produced early");
              if (dr_is_spacer(cin) || !all_ab_data()) early_set_seen++;
            end
          end
        end
        // equations (5)-(10), rail by rail
        A11 = a[1].r1; A10 = a[1].r0; A01 = a[0].r1; A00 = a[0].r0;
        B11 = b[1].r1; B10 = b[1].r0; B01 = b[0].r1; B00 = b[0].r0;
        CIN1 = cin.r1; CIN0 = cin.r0;
        SUM11 = A11&A01&B10&B00&CIN0 | A10&A01&B11&B00&CIN0 | A11&A00&B10&B01&CIN0
              | A10&A00&B11&B01&CIN0 | A11&A00&B11&B01&CIN1 | A11&A01&B11&B00&CIN1
              | A10&A00&B10&B01&CIN1 | A10&A01&B10&B00&CIN1 | A10&A01&B10&B01
              | A11&A00&B10&B00 | A10&A00&B11&B00 | A11&A01&B11&B01;
        SUM10 = A11&A01&B10&B00&CIN1 | A10&A01&B11&B00&CIN1 | A11&A00&B10&B01&CIN1
              | A10&A00&B11&B01&CIN1 | A10&A01&B10&B00&CIN0 | A10&A00&B10&B01&CIN0
              | A11&A01&B11&B00&CIN0 | A11&A00&B11&B01&CIN0 | A11&A00&B11&B00
              | A11&A01&B10&B01 | A10&A01&B11&B01 | A10&A00&B10&B00;
        SUM01 = A01&B00&CIN0 | A00&B01&CIN0 | A00&B00&CIN1 | A01&B01&CIN1;
        SUM00 = A01&B01&CIN0 | A01&B00&CIN1 | A00&B01&CIN1 | A00&B00&CIN0;
        COUT21 = A10&A00&B11&B01&CIN1 | A11&A00&B10&B01&CIN1 | A10&A01&B11&B00&CIN1
               | A11&A01&B10&B00&CIN1 | A10&A01&B11&B01 | A11&A01&B10&B01 | A11&B11;
        COUT20 = A11&A01&B10&B00&CIN0 | A10&A01&B11&B00&CIN0 | A11&A00&B10&B01&CIN0
               | A10&A00&B11&B01&CIN0 | A11&A00&B10&B00 | A10&A00&B11&B00 | A10&B10;
        check(sum[1] == '{r1: SUM11, r0: SUM10}, "high sum differs from equations (5),(6)");
        check(sum[0] == '{r1: SUM01, r0: SUM00}, "low sum differs from equations (7),(8)");
        check(cout == '{r1: COUT21, r0: COUT20}, "carry differs from equations (9),(10)");
        check(sum[1] == dr_encode(s_exp[1]) && sum[0] == dr_encode(s_exp[0])
              && cout == dr_encode(c_exp), "wrong sum/carry");
        // spacer phase
        shuffle(order);
        for (int s = 0; s < 5; s++) begin
          prev_sum = sum; prev_cout = cout;
          set_pair(order[s], '0);
          #1;
          check(!dr_is_illegal(sum[0]) && !dr_is_illegal(sum[1]) && !dr_is_illegal(cout),
                "illegal output code");
          check(((~prev_sum & sum) == '0) && ((~prev_cout & cout) == '0),
                "output rail rose during spacer phase");
          if (all_ab_spacer()) begin
            check(dr_is_spacer(cout) && dr_is_spacer(sum[1]), "carry/high sum not reset early");
            if (dr_is_data(cin)) early_reset_seen++;
          end
        end
        check(dr_is_spacer(sum[0]) && dr_is_spacer(sum[1]) && dr_is_spacer(cout),
              "outputs not spacer after spacer");
      end
    end
    check(early_set_seen > 0, "early set never exercised");
    check(early_reset_seen > 0, "early reset never exercised");
    $display("early set events %0d, early reset events %0d", early_set_seen, early_reset_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

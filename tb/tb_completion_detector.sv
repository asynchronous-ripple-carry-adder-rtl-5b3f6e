// Self-checking testbench for the dual-rail completion detector.
//
// A 65-pair detector (the default width) and a 3-pair one are driven with
// 4-phase transactions whose pairs arrive and leave one at a time in random
// order. done must stay low until the last pair holds data, go high then,
// stay high while the pairs return to spacer, and fall only with the last
// one. Each pair takes a random value, so both rails of every pair are used.
module tb_completion_detector;
  import dr_pkg::*;

  localparam int unsigned N1 = 65;
  localparam int unsigned N2 = 3;

  dr_bit_t [N1-1:0] d1;
  dr_bit_t [N2-1:0] d2;
  logic             done1, done2;
  int checks   = 0;
  int failures = 0;

  completion_detector dut1 (.d(d1), .done(done1));
  completion_detector #(.N(N2)) dut2 (.d(d2), .done(done2));

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order1 [N1];
    int order2 [N2];
    d1 = '0; d2 = '0;
    #1;
    check(!done1 && !done2, "done high while spacer");
    for (int n = 0; n < 200; n++) begin
      for (int i = 0; i < N1; i++) order1[i] = i;
      for (int i = 0; i < N2; i++) order2[i] = i;
      for (int i = N1 - 1; i > 0; i--) begin
        int j, t; j = $urandom_range(i, 0); t = order1[i]; order1[i] = order1[j]; order1[j] = t;
      end
      for (int i = N2 - 1; i > 0; i--) begin
        int j, t; j = $urandom_range(i, 0); t = order2[i]; order2[i] = order2[j]; order2[j] = t;
      end
      for (int s = 0; s < N1; s++) begin
        d1[order1[s]] = dr_encode(1'($urandom));
        if (s < N2) d2[order2[s]] = dr_encode(1'($urandom));
        #1;
        check(done1 == (s == N1 - 1), $sformatf("wide detector data phase step %0d", s));
        if (s < N2) check(done2 == (s == N2 - 1), $sformatf("narrow detector data phase step %0d", s));
      end
      for (int i = N1 - 1; i > 0; i--) begin
        int j, t; j = $urandom_range(i, 0); t = order1[i]; order1[i] = order1[j]; order1[j] = t;
      end
      for (int s = 0; s < N1; s++) begin
        d1[order1[s]] = '0;
        if (s < N2) d2[order2[s]] = '0;
        #1;
        check(done1 == (s != N1 - 1), $sformatf("wide detector spacer phase step %0d", s));
        if (s < N2) check(done2 == (s != N2 - 1), $sformatf("narrow detector spacer phase step %0d", s));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

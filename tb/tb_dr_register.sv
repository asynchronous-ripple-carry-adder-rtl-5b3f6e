// Self-checking testbench for the dual-rail C-element stage register.
//
// Checks, for a 65-pair register at its default width: reset empties it;
// with ackin high a data word passes rail by rail; with ackin low the word is
// held even after the inputs return to spacer, and new data is blocked while
// the register is empty and ackin is low; the register returns to spacer only
// when both its input is spacer and ackin is low. A reference model (one
// C-element equation per rail) is compared after every step of a random run.
module tb_dr_register;
  import dr_pkg::*;

  localparam int unsigned N = 65;

  logic            rst, ackin;
  dr_bit_t [N-1:0] d, q, q_ref;
  int checks   = 0;
  int failures = 0;

  dr_register dut (.rst(rst), .ackin(ackin), .d(d), .q(q));

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  task automatic step();
    #1;
    for (int i = 0; i < N; i++) begin
      if (d[i].r1 == ackin) q_ref[i].r1 = ackin;
      if (d[i].r0 == ackin) q_ref[i].r0 = ackin;
    end
    check(q == q_ref, "register differs from C-element model");
  endtask

  initial begin
    #10000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dr_bit_t [N-1:0] word;
    d = '0; ackin = 1'b1; rst = 1'b1; q_ref = '0;
    #1;
    check(q == '0, "not empty in reset");
    rst = 1'b0;
    step();
    for (int n = 0; n < 100; n++) begin
      for (int i = 0; i < N; i++) word[i] = dr_encode(1'($urandom));
      // data passes with ackin high
      ackin = 1'b1;
      for (int i = 0; i < N; i++) begin d[i] = word[i]; step(); end
      check(q == word, "data word did not pass");
      // acknowledge: held while inputs go to spacer
      ackin = 1'b0; step();
      check(q == word, "word lost when ackin fell");
      for (int i = 0; i < N - 1; i++) begin d[i] = '0; step(); end
      check(q[N-2:0] == '0 && q[N-1] == word[N-1], "pairs not released one by one");
      d[N-1] = '0; step();
      check(q == '0, "register not empty after spacer with ackin low");
      // new data blocked while ackin stays low
      d = word; step();
      check(q == '0, "data passed while ackin low");
      ackin = 1'b1; step();
      check(q == word, "data not passed when ackin rose");
      ackin = 1'b0; d = '0; step();
      ackin = 1'b1; step();
    end
    // random stimulus against the model
    for (int n = 0; n < 2000; n++) begin
      int i;
      i = $urandom_range(N - 1, 0);
      case ($urandom_range(2, 0))
        0: d[i] = dr_encode(1'($urandom));
        1: d[i] = '0;
        default: ackin = ~ackin;
      endcase
      step();
    end
    rst = 1'b1; #1;
    check(q == '0, "reset did not empty the register");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// Self-checking testbench for the two-input Muller C-element.
//
// Drives every input transition from every state, then a long random input
// sequence, and compares the output with a reference state machine kept in
// the testbench (set on 11, clear on 00, hold otherwise). Each hold case is
// checked explicitly, because a plain AND or OR gate would pass the 00/11
// cases.
module tb_c_element;

  logic a, b, y;
  logic y_ref;
  int   checks   = 0;
  int   failures = 0;

  c_element dut (.a(a), .b(b), .y(y));

  task automatic apply(input logic na, input logic nb);
    a = na;
    b = nb;
    #1;
    if (na == nb) y_ref = na;
    checks++;
    if (y !== y_ref) begin
      failures++;
      $display("FAIL a=%0b b=%0b y=%0b expected %0b", na, nb, y, y_ref);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int holds1 = 0, holds0 = 0;
    a = 0; b = 0; y_ref = 0;
    #1;
    // directed: hold after 11 and after 00 in both orders
    apply(1, 0); apply(1, 1); apply(0, 1); apply(1, 1); apply(1, 0);
    apply(0, 0); apply(0, 1); apply(0, 0); apply(1, 0); apply(0, 0);
    for (int i = 0; i < 2000; i++) begin
      logic na, nb;
      na = 1'($urandom);
      nb = 1'($urandom);
      if (na != nb && y_ref)  holds1++;
      if (na != nb && !y_ref) holds0++;
      apply(na, nb);
    end
    checks++;
    if (holds1 == 0 || holds0 == 0) begin
      failures++;
      $display("FAIL hold states not exercised (%0d, %0d)", holds1, holds0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

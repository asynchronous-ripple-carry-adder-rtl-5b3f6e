// Self-checking testbench for the dual-rail ripple carry adder.
//
// Three 32-bit adders share the same inputs: the default arrangement
// (2 SBFAs + 15 DBFAs), an all-DBFA adder (16 DBFAs) and one with 4 SBFAs and
// 14 DBFAs. Each transaction starts from spacer; the 65 input pairs (a, b,
// cin) arrive one at a time in a random order, then return to spacer in
// another random order. After every step every adder is checked for illegal
// codes, monotonic rails and correctness of each output pair already present;
// at the end of the data phase the full sum must equal a + b + cin computed by
// the testbench, and at the end of the spacer phase all outputs must be
// spacer. Directed words (full carry propagation, zero, alternating bits) are
// mixed with random ones. Early set (an output pair valid before the last
// input pair arrives) and early reset (an output pair back to spacer before
// the last input pair leaves) are counted and must both occur.
module tb_async_rca;
  import dr_pkg::*;

  localparam int unsigned W   = 32;
  localparam int unsigned NIN = 2 * W + 1;
  localparam int          NV  = 3;
  localparam int          NWORDS = 400;

  dr_bit_t [W-1:0] a, b;
  dr_bit_t         cin;
  dr_bit_t [W:0]   res [NV];   // {cout, sum} of each variant

  int checks   = 0;
  int failures = 0;
  int early_set_seen   = 0;
  int early_reset_seen = 0;

  async_rca #(.WIDTH(W), .NUM_SBFA(2)) dut_2sbfa (
    .a(a), .b(b), .cin(cin), .sum(res[0][W-1:0]), .cout(res[0][W]));
  async_rca #(.WIDTH(W), .NUM_SBFA(0)) dut_0sbfa (
    .a(a), .b(b), .cin(cin), .sum(res[1][W-1:0]), .cout(res[1][W]));
  async_rca #(.WIDTH(W), .NUM_SBFA(4)) dut_4sbfa (
    .a(a), .b(b), .cin(cin), .sum(res[2][W-1:0]), .cout(res[2][W]));

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

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

  initial begin
    #100000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int      order [NIN];
    dr_bit_t val [NIN];
    dr_bit_t [W:0] prev [NV];
    a = '0; b = '0; cin = '0;
    #1;
    // cell counts of the three arrangements: 2+15, 0+16 and 4+14
    check(dut_2sbfa.NUM_DBFA == 15 && dut_0sbfa.NUM_DBFA == 16 && dut_4sbfa.NUM_DBFA == 14,
          "unexpected number of DBFAs");
    for (int n = 0; n < NWORDS; n++) begin
      logic [W-1:0] xa, xb;
      logic         xc;
      logic [W:0]   exp;
      case (n)
        0: begin xa = '1; xb = '0; xc = 1'b1; end              // carry through all bits
        1: begin xa = '1; xb = 32'd1; xc = 1'b0; end
        2: begin xa = '0; xb = '0; xc = 1'b0; end
        3: begin xa = '1; xb = '1; xc = 1'b1; end
        4: begin xa = 32'hAAAA_AAAA; xb = 32'h5555_5555; xc = 1'b1; end
        5: begin xa = 32'h8000_0000; xb = 32'h8000_0000; xc = 1'b0; end
        default: begin xa = $urandom; xb = $urandom; xc = 1'($urandom); end
      endcase
      exp = {1'b0, xa} + {1'b0, xb} + {{W{1'b0}}, xc};
      for (int i = 0; i < W; i++) begin
        val[i]     = dr_encode(xa[i]);
        val[W + i] = dr_encode(xb[i]);
      end
      val[2 * W] = dr_encode(xc);
      for (int i = 0; i < NIN; i++) order[i] = i;
      shuffle(order);
      // data phase
      for (int s = 0; s < NIN; s++) begin
        for (int v = 0; v < NV; v++) prev[v] = res[v];
        set_pair(order[s], val[order[s]]);
        #1;
        for (int v = 0; v < NV; v++) begin
          logic ok_code, ok_mono, ok_val;
          ok_code = 1'b1; ok_val = 1'b1;
          ok_mono = (prev[v] & ~res[v]) == '0;
          for (int k = 0; k <= W; k++) begin
            if (dr_is_illegal(res[v][k])) ok_code = 1'b0;
            if (dr_is_data(res[v][k])) begin
              if (res[v][k].r1 != exp[k]) ok_val = 1'b0;
              if (!dr_is_data(prev[v][k]) && s < NIN - 1) early_set_seen++;
            end
          end
          check(ok_code, $sformatf("variant %0d illegal code word %0d", v, n));
          check(ok_mono, $sformatf("variant %0d rail fell in data phase, word %0d", v, n));
          check(ok_val,  $sformatf("variant %0d wrong early output, word %0d", v, n));
        end
      end
      for (int v = 0; v < NV; v++) begin
        logic [W:0] got;
        logic       complete;
        complete = 1'b1;
        for (int k = 0; k <= W; k++) begin
          got[k] = res[v][k].r1;
          if (!dr_is_data(res[v][k])) complete = 1'b0;
        end
        check(complete && got == exp,
              $sformatf("variant %0d word %0d: %h + %h + %0d gave %h, expected %h",
                        v, n, xa, xb, xc, got, exp));
      end
      // spacer phase
      shuffle(order);
      for (int s = 0; s < NIN; s++) begin
        for (int v = 0; v < NV; v++) prev[v] = res[v];
        set_pair(order[s], '0);
        #1;
        for (int v = 0; v < NV; v++) begin
          check((~prev[v] & res[v]) == '0,
                $sformatf("variant %0d rail rose in spacer phase, word %0d", v, n));
          for (int k = 0; k <= W; k++)
            if (dr_is_data(prev[v][k]) && dr_is_spacer(res[v][k]) && s < NIN - 1)
              early_reset_seen++;
        end
      end
      for (int v = 0; v < NV; v++)
        check(res[v] == '0, $sformatf("variant %0d not spacer after word %0d", v, n));
    end
    check(early_set_seen > 0, "early set never exercised");
    check(early_reset_seen > 0, "early reset never exercised");
    $display("words %0d, early set events %0d, early reset events %0d",
             NWORDS, early_set_seen, early_reset_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

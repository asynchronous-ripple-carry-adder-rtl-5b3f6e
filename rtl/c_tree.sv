// Balanced tree of two-input C-elements: an N-input C-element.
//
// The output rises when all N inputs are 1 and falls when all are 0; in
// between it holds. A wide C-element is split into two-input C-elements, the
// safe (gate-orphan free) decomposition the source uses. The tree is built
// recursively, halves first, so its depth is ceil(log2 N) C-elements.
module c_tree #(
  parameter int unsigned N = 2
) (
  input  logic [N-1:0] in,
  output logic         y
);

  if (N == 1) begin : g_leaf
    assign y = in[0];
  end else if (N == 2) begin : g_pair
    c_element u_c (.a(in[0]), .b(in[1]), .y(y));
  end else begin : g_split
    localparam int unsigned NLO = N / 2;
    logic y_lo, y_hi;
    c_tree #(.N(NLO))     u_lo (.in(in[NLO-1:0]), .y(y_lo));
    c_tree #(.N(N - NLO)) u_hi (.in(in[N-1:NLO]), .y(y_hi));
    c_element u_c (.a(y_lo), .b(y_hi), .y(y));
  end

endmodule

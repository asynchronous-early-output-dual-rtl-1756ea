// c_tree: N-input C-element built as a balanced tree of 2-input C-elements.
//
// The output rises when all N inputs are high and falls when all are low; in
// between it holds. The paper decomposes wide C-elements into trees of 2-input
// C-elements; this module splits the inputs into two halves recursively and
// joins the two half-results with one c_element, giving ceil(log2 N) levels.
//
// Timing: no clock; ceil(log2 N) C-element delays.
module c_tree #(
  parameter int unsigned N = 2
) (
  input  logic [N-1:0] x,
  output logic         y
);

  generate
    if (N == 1) begin : g_leaf
      assign y = x[0];
    end else if (N == 2) begin : g_pair
      c_element u_c (.a(x[0]), .b(x[1]), .q(y));
    end else begin : g_split
      localparam int unsigned NL = N / 2;
      localparam int unsigned NH = N - NL;
      logic yl, yh;
      c_tree #(.N(NL)) u_lo (.x(x[NL-1:0]), .y(yl));
      c_tree #(.N(NH)) u_hi (.x(x[N-1:NL]), .y(yh));
      c_element u_c (.a(yl), .b(yh), .q(y));
    end
  endgenerate

endmodule

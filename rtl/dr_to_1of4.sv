// dr_to_1of4: dual-rail to 1-of-4 encoder for one bit pair.
//
// Takes the more significant bit x and the less significant bit y of a pair,
// both dual-rail, and raises the one 1-of-4 wire e[2x+y], as in the paper's
// encoding table (E0 = 00, E1 = 01, E2 = 10, E3 = 11). Each output wire is a
// 2-input C-element of one rail of x and one rail of y, so a wire rises only
// when both bits have arrived and falls only when both have returned to
// spacer; the encoder is therefore input-complete and indicates both bits.
// The paper places such encoders in front of the heterogeneously encoded adder
// but does not show their gates; the C-element form is this design's choice
// (plain AND gates would encode equally well but would release early).
//
// Timing: no clock; one C-element delay.
module dr_to_1of4
  import di_pkg::*;
(
  input  dr_t x,  // more significant bit
  input  dr_t y,  // less significant bit
  output q4_t e
);

  logic e0, e1, e2, e3;

  c_element u_e0 (.a(x.r0), .b(y.r0), .q(e0));
  c_element u_e1 (.a(x.r0), .b(y.r1), .q(e1));
  c_element u_e2 (.a(x.r1), .b(y.r0), .q(e2));
  c_element u_e3 (.a(x.r1), .b(y.r1), .q(e3));

  assign e = {e3, e2, e1, e0};

endmodule

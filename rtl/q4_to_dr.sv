// q4_to_dr: 1-of-4 to dual-rail decoder for one bit pair.
//
// Turns a 1-of-4 digit e (e[k] high means value k) back into two dual-rail bits:
// the more significant bit x is 1 for values 2 and 3, the less significant bit
// y is 1 for values 1 and 3. Each rail is a 2-input OR. A spacer on e gives
// spacer on both bits. The paper places such decoders after the
// heterogeneously encoded adder without showing their gates; the OR form is
// the simplest circuit with that function.
//
// Timing: no clock; one OR delay.
module q4_to_dr
  import di_pkg::*;
(
  input  q4_t e,
  output dr_t x,  // more significant bit
  output dr_t y   // less significant bit
);

  assign x.r1 = e[2] | e[3];
  assign x.r0 = e[0] | e[1];
  assign y.r1 = e[1] | e[3];
  assign y.r0 = e[0] | e[2];

endmodule

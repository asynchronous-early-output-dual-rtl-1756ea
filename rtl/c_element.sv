// c_element: two-input Muller C-element, the rendezvous cell of the adders.
//
// When both inputs are 1 the output becomes 1, when both are 0 it becomes 0,
// and when they differ the output keeps its value. The adders use it to join a
// carry-input rail with a partial-sum term, so that an output rail rises only
// after the carry has arrived and falls only after the carry has returned to
// spacer. The paper builds this cell by hand from 12 transistors; here its
// function is written as a level-sensitive latch: transparent while a == b,
// holding otherwise, which is exactly the C-element's next-state rule
// q+ = a&b | q&(a|b). The latch that lint and synthesis report is therefore
// intended and is the state of the C-element itself. There is no reset: every
// use in this design sees both inputs low (spacer) at start-up, which clears
// the output.
//
// Timing: purely combinational-with-state, no clock. The output settles in the
// same evaluation step as the input change that enables it.
module c_element (
  input  logic a,
  input  logic b,
  output logic q
);

  always_latch begin
    if (a == b) q = a;
  end

endmodule

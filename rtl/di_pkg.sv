// di_pkg: types and helper functions shared by the delay-insensitive adder RTL.
//
// A dual-rail (1-of-2) signal carries one bit on two wires. Rail r1 high means
// logic 1, rail r0 high means logic 0, both low is the spacer (empty token) that
// separates two data tokens under the 4-phase return-to-zero handshake, and
// both high is illegal. A 1-of-4 signal carries two bits on four wires, exactly
// one of which is high for a data token (value = index of the high wire); all
// low is the spacer. The value-to-index mapping follows the paper's encoding
// table: for the bit pair (X, Y), with X the more significant bit, wire
// E[2X+Y] is the one raised.
package di_pkg;

  // One dual-rail bit: {r1, r0}.
  typedef struct packed {
    logic r1;
    logic r0;
  } dr_t;

  localparam dr_t DR_SPACER = '{r1: 1'b0, r0: 1'b0};

  // One 1-of-4 digit: q[k] high means the two-bit value k.
  typedef logic [3:0] q4_t;

  localparam q4_t Q4_SPACER = 4'b0000;

  function automatic dr_t dr_encode(input logic bit_value);
    dr_encode = '{r1: bit_value, r0: ~bit_value};
  endfunction

  function automatic logic dr_is_valid(input dr_t d);
    dr_is_valid = d.r1 ^ d.r0;
  endfunction

  function automatic logic dr_is_spacer(input dr_t d);
    dr_is_spacer = ~(d.r1 | d.r0);
  endfunction

  function automatic q4_t q4_encode(input logic [1:0] value);
    q4_encode = q4_t'(4'b0001 << value);
  endfunction

endpackage

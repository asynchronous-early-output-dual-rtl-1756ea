// dr_register: 4-phase input register of an asynchronous stage.
//
// N dual-rail bits. Every rail is a 2-input C-element of the incoming rail and
// the stage's ACKIN: with ACKIN high (the next stage has released the previous
// token) a data token passes and is held; with ACKIN low (the next stage has
// taken the token) the spacer that follows passes. This is the usual
// C-element latch of 4-phase dual-rail pipelines; the paper names the register
// but does not show its cells, so this form is this design's choice. rst
// (active high, asynchronous, not in the paper) clears every rail to spacer so
// that the handshake starts from a known state.
//
// The state is held in level-sensitive latches (one per rail); the latch that
// lint and synthesis report is the C-element state and is intended.
//
// Timing: no clock; one C-element delay from data or ACKIN to q.
module dr_register
  import di_pkg::*;
#(
  parameter int unsigned N = 65
) (
  input  logic        rst,
  input  logic        ackin,
  input  dr_t [N-1:0] d,
  output dr_t [N-1:0] q
);

  logic [2*N-1:0] din, qout;
  assign din = d;
  assign q   = qout;

  for (genvar i = 0; i < 2 * N; i++) begin : g_rail
    always_latch begin
      if (rst)                  qout[i] = 1'b0;
      else if (din[i] == ackin) qout[i] = ackin;
    end
  end

endmodule

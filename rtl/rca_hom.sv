// rca_hom: ripple carry adder built from homogeneously encoded early output
// dual-bit full adders.
//
// Adds two WIDTH-bit dual-rail operands and a dual-rail carry-in. WIDTH/2
// dbfa_hom cells are chained through their dual-rail carries, cell i handling
// bits 2i+1 and 2i, so a 32-bit adder (the size the paper evaluates) has 16
// cells and 16 carry hops instead of 32. All operands, sums and carries are
// dual-rail and obey the 4-phase return-to-zero protocol: a spacer on all
// inputs returns all outputs to spacer, a full data token on all inputs makes
// every output valid. REDUNDANT selects the carry logic of every cell (1: the
// redundant AO21 carry path the paper recommends).
//
// Timing: no clock; the worst-case forward latency is the ripple through all
// WIDTH/2 carry gates.
module rca_hom
  import di_pkg::*;
#(
  parameter int unsigned WIDTH     = 32,
  parameter bit          REDUNDANT = 1'b1
) (
  input  dr_t [WIDTH-1:0] a,
  input  dr_t [WIDTH-1:0] b,
  input  dr_t             cin,
  output dr_t [WIDTH-1:0] sum,
  output dr_t             cout
);

  localparam int unsigned CELLS = WIDTH / 2;

  initial begin
    assert (WIDTH >= 2 && WIDTH % 2 == 0)
      else $error("rca_hom: WIDTH must be even and at least 2");
  end

  dr_t [CELLS:0] carry;
  assign carry[0] = cin;

  for (genvar i = 0; i < CELLS; i++) begin : g_cell
    dbfa_hom #(.REDUNDANT(REDUNDANT)) u_dbfa (
      .a1  (a[2*i+1]),
      .a0  (a[2*i]),
      .b1  (b[2*i+1]),
      .b0  (b[2*i]),
      .cin (carry[i]),
      .sum1(sum[2*i+1]),
      .sum0(sum[2*i]),
      .cout(carry[i+1])
    );
  end

  assign cout = carry[CELLS];

endmodule

// rca_het: ripple carry adder built from heterogeneously encoded early output
// dual-bit full adders.
//
// Operands and sum are given as WIDTH/2 1-of-4 digits (digit i covers bits
// 2i+1 and 2i); the carry-in, the carries between cells and the carry-out are
// dual-rail. WIDTH/2 dbfa_het cells are chained through their carries; a 32-bit
// adder, the size the paper evaluates, has 16 cells. Conversion from and to
// dual-rail (dr_to_1of4, q4_to_dr) sits outside this block, in front of and
// after it, as the paper describes. REDUNDANT selects the carry logic of every
// cell (1: the redundant AO21 carry path the paper recommends).
//
// Timing: no clock; worst-case forward latency is the ripple through all
// WIDTH/2 carry gates.
module rca_het
  import di_pkg::*;
#(
  parameter int unsigned WIDTH     = 32,
  parameter bit          REDUNDANT = 1'b1
) (
  input  q4_t [WIDTH/2-1:0] a,
  input  q4_t [WIDTH/2-1:0] b,
  input  dr_t               cin,
  output q4_t [WIDTH/2-1:0] sum,
  output dr_t               cout
);

  localparam int unsigned CELLS = WIDTH / 2;

  initial begin
    assert (WIDTH >= 2 && WIDTH % 2 == 0)
      else $error("rca_het: WIDTH must be even and at least 2");
  end

  dr_t [CELLS:0] carry;
  assign carry[0] = cin;

  for (genvar i = 0; i < CELLS; i++) begin : g_cell
    dbfa_het #(.REDUNDANT(REDUNDANT)) u_dbfa (
      .a   (a[i]),
      .b   (b[i]),
      .cin (carry[i]),
      .sum (sum[i]),
      .cout(carry[i+1])
    );
  end

  assign cout = carry[CELLS];

endmodule

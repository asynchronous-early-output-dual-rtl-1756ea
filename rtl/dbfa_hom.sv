// dbfa_hom: early output dual-bit full adder, homogeneous (all dual-rail) encoding.
//
// Adds two 2-bit operands A = {a1, a0} and B = {b1, b0} and a carry-in, each
// bit dual-rail, and produces the 2-bit sum {sum1, sum0} and the carry-out,
// also dual-rail. The gate network follows the paper's disjoint sum-of-products
// equations (1)-(6) and its technology-mapped schematic:
//
//   * First level: 4-input ANDs over the four operand bits (never the carry)
//     classify the operand pair by a+b. p3 collects the four products with
//     a+b = 3, q15 those with a+b = 1 or 5, r26 those with a+b = 2 or 6,
//     r04 those with a+b = 0 or 4. g1 (= A11.B11 + the a+b = 4 products with
//     both LSBs 1) and g0 (= A10.B10 + the a+b = 2 products with both LSBs 0)
//     generate a carry independent of the carry-in. For the least significant
//     sum bit, two AO22 terms give the LSB half-sum x1 (a0 != b0) and x0.
//   * Second level: 2-input C-elements join each of p3, q15, x1, x0 with both
//     carry-in rails; ORs then form the sum rails.
//   * Carry-out: REDUNDANT = 1 (the configuration the paper recommends) builds
//     cout.r1 = AO21(cin.r1, p3, g1) and cout.r0 = AO21(cin.r0, p3, g0), so the
//     carry path through a stage is a single AO21. REDUNDANT = 0 reuses the
//     C-element outputs C(p3, cin.rX) and ORs them with gX, which puts a
//     C-element and an OR on the carry path.
//
// The first-level gates do not look at all inputs (input-incomplete), so the
// adder is early output: the outputs can go valid before every input has
// arrived (for instance a carry generated by A11.B11) and can return to spacer
// before every input has. Input completeness is left to the completion
// detector at the stage's input register, as in the paper.
//
// The split of the first-level ORs into 2- and 3-input gates (r26 = k0 + two
// products, r04 = k1 + two products) follows the schematic; where its wiring
// into the sum ORs cannot be read, equations (3) and (4) decide.
//
// Timing: no clock; outputs follow inputs through two or three gate levels.
module dbfa_hom
  import di_pkg::*;
#(
  parameter bit REDUNDANT = 1'b1
) (
  input  dr_t a1,   // (A11, A10): augend MSB
  input  dr_t a0,   // (A01, A00): augend LSB
  input  dr_t b1,   // (B11, B10): addend MSB
  input  dr_t b0,   // (B01, B00): addend LSB
  input  dr_t cin,  // (CIN1, CIN0)
  output dr_t sum1, // (SUM11, SUM10)
  output dr_t sum0, // (SUM01, SUM00)
  output dr_t cout  // (COUT1, COUT0)
);

  // First-level products, named by the operand pair values (a, b).
  logic m01, m10, m12, m21, m23, m32;  // a+b = 1, 3, 5
  logic m03, m30;
  logic m02, m20, m11, m33;            // a+b = 2, 6
  logic m00, m22, m13, m31;            // a+b = 0, 4

  assign m03 = a1.r0 & a0.r0 & b1.r1 & b0.r1;
  assign m21 = a1.r1 & a0.r0 & b1.r0 & b0.r1;
  assign m12 = a1.r0 & a0.r1 & b1.r1 & b0.r0;
  assign m30 = a1.r1 & a0.r1 & b1.r0 & b0.r0;

  assign m23 = a1.r1 & a0.r0 & b1.r1 & b0.r1;
  assign m32 = a1.r1 & a0.r1 & b1.r1 & b0.r0;
  assign m01 = a1.r0 & a0.r0 & b1.r0 & b0.r1;
  assign m10 = a1.r0 & a0.r1 & b1.r0 & b0.r0;

  assign m13 = a1.r0 & a0.r1 & b1.r1 & b0.r1;
  assign m31 = a1.r1 & a0.r1 & b1.r0 & b0.r1;
  assign m20 = a1.r1 & a0.r0 & b1.r0 & b0.r0;
  assign m02 = a1.r0 & a0.r0 & b1.r1 & b0.r0;

  assign m11 = a1.r0 & a0.r1 & b1.r0 & b0.r1;
  assign m33 = a1.r1 & a0.r1 & b1.r1 & b0.r1;
  assign m22 = a1.r1 & a0.r0 & b1.r1 & b0.r0;
  assign m00 = a1.r0 & a0.r0 & b1.r0 & b0.r0;

  logic p3, q15, k1, k0, g1, g0, r26, r04;

  assign p3  = m03 | m21 | m12 | m30;     // a+b = 3: carry propagates
  assign q15 = m23 | m32 | m01 | m10;     // a+b = 1 or 5
  assign k1  = m13 | m31;                 // a+b = 4 with both LSBs 1
  assign k0  = m20 | m02;                 // a+b = 2 with both LSBs 0
  assign g1  = (a1.r1 & b1.r1) | k1;      // AO21: carry generated
  assign g0  = (a1.r0 & b1.r0) | k0;      // AO21: carry killed
  assign r26 = k0 | m11 | m33;            // a+b = 2 or 6: MSB of sum is 1
  assign r04 = k1 | m22 | m00;            // a+b = 0 or 4: MSB of sum is 0

  logic x1, x0;
  assign x1 = (a0.r0 & b0.r1) | (a0.r1 & b0.r0);  // AO22: a0 != b0
  assign x0 = (a0.r0 & b0.r0) | (a0.r1 & b0.r1);  // AO22: a0 == b0

  // Second level: C-elements joining the carry-in.
  logic c_p3_1, c_p3_0, c_q15_1, c_q15_0;
  logic c_x1_1, c_x1_0, c_x0_1, c_x0_0;

  c_element u_c_p3_1  (.a(cin.r1), .b(p3),  .q(c_p3_1));
  c_element u_c_p3_0  (.a(cin.r0), .b(p3),  .q(c_p3_0));
  c_element u_c_q15_1 (.a(cin.r1), .b(q15), .q(c_q15_1));
  c_element u_c_q15_0 (.a(cin.r0), .b(q15), .q(c_q15_0));
  c_element u_c_x1_1  (.a(cin.r1), .b(x1),  .q(c_x1_1));
  c_element u_c_x1_0  (.a(cin.r0), .b(x1),  .q(c_x1_0));
  c_element u_c_x0_1  (.a(cin.r1), .b(x0),  .q(c_x0_1));
  c_element u_c_x0_0  (.a(cin.r0), .b(x0),  .q(c_x0_0));

  // Sum outputs, equations (3)-(6).
  assign sum1.r1 = c_p3_0 | c_q15_1 | r26;
  assign sum1.r0 = c_p3_1 | c_q15_0 | r04;
  assign sum0.r1 = c_x1_0 | c_x0_1;
  assign sum0.r0 = c_x1_1 | c_x0_0;

  // Carry output, equations (1)-(2).
  generate
    if (REDUNDANT) begin : g_redundant
      assign cout.r1 = (cin.r1 & p3) | g1;
      assign cout.r0 = (cin.r0 & p3) | g0;
    end else begin : g_plain
      assign cout.r1 = c_p3_1 | g1;
      assign cout.r0 = c_p3_0 | g0;
    end
  endgenerate

endmodule

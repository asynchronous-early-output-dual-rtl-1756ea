// dbfa_het: early output dual-bit full adder, heterogeneous encoding.
//
// The two-bit augend, addend and sum are 1-of-4 coded (a[k] high means A = k),
// while the carry-in and carry-out stay dual-rail so that the adder can be
// chained bit-pair by bit-pair. The gate network follows the paper's equations
// (7)-(12) and its schematic:
//
//   * First level: 2-input ANDs a[i]&b[j] (AO22 gates where two products share
//     a gate) grouped by (i+j) mod 4 into t0..t3. The products a1b1, a3b3,
//     a0b0 and a2b2 are separate ANDs whose outputs are also tapped by the
//     carry logic.
//   * g1 = OR of the products with i+j >= 4 (carry generated regardless of the
//     carry-in), g0 = OR of those with i+j <= 2 (carry killed).
//   * Second level: 2-input C-elements join each tK with each carry-in rail;
//     sum[k] = C(t[k], cin.r0) | C(t[k-1 mod 4], cin.r1).
//   * Carry-out: REDUNDANT = 1 (the recommended configuration) uses
//     cout.rX = AO21(cin.rX, t3, gX), a single gate on the carry path;
//     REDUNDANT = 0 uses cout.rX = C(t3, cin.rX) | gX.
//
// Because the first level only looks at the operands, the adder is early
// output: carry and sum can go valid, and return to spacer, before all inputs
// have. Timing: no clock; outputs follow inputs through two or three gate
// levels.
module dbfa_het
  import di_pkg::*;
#(
  parameter bit REDUNDANT = 1'b1
) (
  input  q4_t a,    // A0..A3
  input  q4_t b,    // B0..B3
  input  dr_t cin,  // (CIN1, CIN0)
  output q4_t sum,  // SUM0..SUM3
  output dr_t cout  // (COUT1, COUT0)
);

  logic m11, m33, m00, m22;
  assign m11 = a[1] & b[1];
  assign m33 = a[3] & b[3];
  assign m00 = a[0] & b[0];
  assign m22 = a[2] & b[2];

  // AO22 pairs.
  logic ao_02_20, ao_01_10, ao_23_32, ao_13_31, ao_03_30, ao_12_21;
  assign ao_02_20 = (a[0] & b[2]) | (a[2] & b[0]);
  assign ao_01_10 = (a[0] & b[1]) | (a[1] & b[0]);
  assign ao_23_32 = (a[2] & b[3]) | (a[3] & b[2]);
  assign ao_13_31 = (a[1] & b[3]) | (a[3] & b[1]);
  assign ao_03_30 = (a[0] & b[3]) | (a[3] & b[0]);
  assign ao_12_21 = (a[1] & b[2]) | (a[2] & b[1]);

  // (a+b) mod 4 classes.
  logic t0, t1, t2, t3;
  assign t2 = ao_02_20 | (m11 | m33);
  assign t1 = ao_01_10 | ao_23_32;
  assign t0 = ao_13_31 | (m00 | m22);
  assign t3 = ao_03_30 | ao_12_21;

  logic g1, g0;
  assign g1 = ao_13_31 | ao_23_32 | m22 | m33;   // a+b >= 4
  assign g0 = ao_01_10 | ao_02_20 | m00 | m11;   // a+b <= 2

  logic [3:0] c_t_0, c_t_1;  // C(tK, cin.r0), C(tK, cin.r1)
  logic [3:0] t;
  assign t = {t3, t2, t1, t0};

  for (genvar k = 0; k < 4; k++) begin : g_join
    logic q0, q1;
    c_element u_c0 (.a(cin.r0), .b(t[k]), .q(q0));
    c_element u_c1 (.a(cin.r1), .b(t[k]), .q(q1));
    assign c_t_0[k] = q0;
    assign c_t_1[k] = q1;
  end

  // Sum outputs, equations (9)-(12).
  assign sum[0] = c_t_0[0] | c_t_1[3];
  assign sum[1] = c_t_0[1] | c_t_1[0];
  assign sum[2] = c_t_0[2] | c_t_1[1];
  assign sum[3] = c_t_0[3] | c_t_1[2];

  // Carry output, equations (7)-(8).
  generate
    if (REDUNDANT) begin : g_redundant
      assign cout.r1 = (cin.r1 & t3) | g1;
      assign cout.r0 = (cin.r0 & t3) | g0;
    end else begin : g_plain
      assign cout.r1 = c_t_1[3] | g1;
      assign cout.r0 = c_t_0[3] | g0;
    end
  endgenerate

endmodule

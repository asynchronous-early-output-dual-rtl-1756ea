// eo_dbfa_rca_top: the two proposed early output dual-bit adders, each in its
// own 4-phase asynchronous system stage.
//
// Each stage follows the paper's generic stage: an input register
// (dr_register) holding the dual-rail operands A, B and the carry-in, a
// completion detector on the register outputs whose output is the stage's
// ACKOUT to the transmitter, and the function block, here a WIDTH-bit ripple
// carry adder. The register's ACKIN is the receiver's ACKOUT inverted.
//
//   * hom_*: homogeneous stage, function block rca_hom (all dual-rail).
//   * het_*: heterogeneous stage, function block rca_het, with a dual-rail to
//     1-of-4 encoder per operand bit pair in front of it and a 1-of-4 to
//     dual-rail decoder per sum digit after it, so that both stages present
//     the same dual-rail interface.
//
// The paper implemented each adder on its own; placing both in one top is a
// convenience of this RTL. The two stages share only rst and run their
// handshakes independently.
//
// Handshake, per stage (4-phase return-to-zero): the transmitter puts a data
// token on {a, b, cin} while ACKOUT is low; the register passes it (its ACKIN
// is high while rx_ack is low); ACKOUT rises once all 2*WIDTH+1 inputs are
// latched; the adder outputs become valid (possibly earlier, being early
// output); the receiver raises rx_ack; the transmitter, seeing ACKOUT high,
// sends spacer, which passes the register once rx_ack is high; ACKOUT falls,
// the outputs return to spacer, the receiver lowers rx_ack.
//
// Timing rule: the adders are early output, so their outputs can all be spacer
// while some register rails still hold data. The receiver must therefore not
// release rx_ack (which re-opens the register for the next token) before this
// stage's ACKOUT has fallen; otherwise a rail still at 1 would never clear.
// The stage does not enforce this itself; the source design does not discuss
// it, and the environment (or relative timing in a real pipeline) must.
//
// rst (active high) clears the input registers; it is this design's addition.
module eo_dbfa_rca_top
  import di_pkg::*;
#(
  parameter int unsigned WIDTH     = 32,
  parameter bit          REDUNDANT = 1'b1
) (
  input  logic            rst,

  input  dr_t [WIDTH-1:0] hom_a,
  input  dr_t [WIDTH-1:0] hom_b,
  input  dr_t             hom_cin,
  output logic            hom_ackout,
  input  logic            hom_rx_ack,
  output dr_t [WIDTH-1:0] hom_sum,
  output dr_t             hom_cout,

  input  dr_t [WIDTH-1:0] het_a,
  input  dr_t [WIDTH-1:0] het_b,
  input  dr_t             het_cin,
  output logic            het_ackout,
  input  logic            het_rx_ack,
  output dr_t [WIDTH-1:0] het_sum,
  output dr_t             het_cout
);

  localparam int unsigned NIN    = 2 * WIDTH + 1;
  localparam int unsigned DIGITS = WIDTH / 2;

  // ---------------- homogeneous stage ----------------
  dr_t [NIN-1:0]   hom_q;
  dr_t [WIDTH-1:0] hom_ra, hom_rb;
  dr_t             hom_rcin;

  dr_register #(.N(NIN)) u_hom_reg (
    .rst  (rst),
    .ackin(~hom_rx_ack),
    .d    ({hom_cin, hom_b, hom_a}),
    .q    (hom_q)
  );

  assign {hom_rcin, hom_rb, hom_ra} = hom_q;

  completion_detector #(.N(NIN)) u_hom_cd (
    .d   (hom_q),
    .done(hom_ackout)
  );

  rca_hom #(.WIDTH(WIDTH), .REDUNDANT(REDUNDANT)) u_hom_rca (
    .a   (hom_ra),
    .b   (hom_rb),
    .cin (hom_rcin),
    .sum (hom_sum),
    .cout(hom_cout)
  );

  // ---------------- heterogeneous stage ----------------
  dr_t [NIN-1:0]    het_q;
  dr_t [WIDTH-1:0]  het_ra, het_rb;
  dr_t              het_rcin;
  q4_t [DIGITS-1:0] het_qa, het_qb, het_qsum;

  dr_register #(.N(NIN)) u_het_reg (
    .rst  (rst),
    .ackin(~het_rx_ack),
    .d    ({het_cin, het_b, het_a}),
    .q    (het_q)
  );

  assign {het_rcin, het_rb, het_ra} = het_q;

  completion_detector #(.N(NIN)) u_het_cd (
    .d   (het_q),
    .done(het_ackout)
  );

  for (genvar i = 0; i < DIGITS; i++) begin : g_het_conv
    dr_to_1of4 u_enc_a (.x(het_ra[2*i+1]), .y(het_ra[2*i]), .e(het_qa[i]));
    dr_to_1of4 u_enc_b (.x(het_rb[2*i+1]), .y(het_rb[2*i]), .e(het_qb[i]));
    q4_to_dr   u_dec   (.e(het_qsum[i]), .x(het_sum[2*i+1]), .y(het_sum[2*i]));
  end

  rca_het #(.WIDTH(WIDTH), .REDUNDANT(REDUNDANT)) u_het_rca (
    .a   (het_qa),
    .b   (het_qb),
    .cin (het_rcin),
    .sum (het_qsum),
    .cout(het_cout)
  );

endmodule

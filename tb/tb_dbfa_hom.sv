// tb_dbfa_hom: self-checking test of the homogeneously encoded dual-bit adder.
//
// Both carry variants (REDUNDANT = 1 and 0) are instantiated side by side.
// For every one of the 32 input combinations, and several random arrival
// orders each, the five dual-rail inputs are raised one at a time from spacer,
// then dropped one at a time back to spacer. After every step it checks that
// no output pair is illegal (both rails high), that every valid output carries
// the arithmetically expected value (a + b + cin, computed here with
// integers), that all outputs are valid once all inputs are, and that all are
// spacer once all inputs are. It also counts early-set (carry valid before the
// carry-in arrived) and early-reset (an output back to spacer while an input
// still holds data) events, and checks the one behaviour that separates the
// two carry variants: with a+b = 3 and cin = 1 latched, withdrawing an
// operand releases the redundant carry-out at once but not the plain one.
module tb_dbfa_hom;
  import di_pkg::*;

  dr_t in_v [5];  // a1, a0, b1, b0, cin
  dr_t s1 [2], s0 [2], co [2];
  int  checks = 0, failures = 0;
  int  early_set = 0, early_reset = 0;

  dbfa_hom #(.REDUNDANT(1'b1)) u_red (
    .a1(in_v[0]), .a0(in_v[1]), .b1(in_v[2]), .b0(in_v[3]), .cin(in_v[4]),
    .sum1(s1[0]), .sum0(s0[0]), .cout(co[0]));
  dbfa_hom #(.REDUNDANT(1'b0)) u_plain (
    .a1(in_v[0]), .a0(in_v[1]), .b1(in_v[2]), .b0(in_v[3]), .cin(in_v[4]),
    .sum1(s1[1]), .sum0(s0[1]), .cout(co[1]));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check_out(input dr_t o, input logic exp_bit,
                                    input bit must_valid, input bit must_spacer,
                                    input string what);
    checks++;
    if ((o.r1 & o.r0) || (dr_is_valid(o) && o.r1 != exp_bit) ||
        (must_valid && !dr_is_valid(o)) || (must_spacer && !dr_is_spacer(o))) begin
      failures++;
      $display("%s wrong: %b%b expected %b (valid=%0d spacer=%0d)",
               what, o.r1, o.r0, exp_bit, must_valid, must_spacer);
    end
  endfunction

  task automatic check_all(input logic [2:0] exp, input bit mv, input bit ms);
    for (int k = 0; k < 2; k++) begin
      check_out(s0[k], exp[0], mv, ms, $sformatf("sum0[%0d]", k));
      check_out(s1[k], exp[1], mv, ms, $sformatf("sum1[%0d]", k));
      check_out(co[k], exp[2], mv, ms, $sformatf("cout[%0d]", k));
    end
  endtask

  initial begin
    logic [4:0] v;
    logic [2:0] exp;
    int order [5];
    for (int i = 0; i < 5; i++) in_v[i] = DR_SPACER;
    #1;
    check_all(3'b000, 0, 1);
    for (int rep = 0; rep < 8; rep++) begin
      for (int c = 0; c < 32; c++) begin
        v = 5'(c);  // {a1, a0, b1, b0, cin}
        exp = 3'({v[4], v[3]} + {v[2], v[1]} + v[0]);
        for (int i = 0; i < 5; i++) order[i] = i;
        order.shuffle();
        // Rising phase.
        for (int s = 0; s < 5; s++) begin
          in_v[order[s]] = dr_encode(v[4 - order[s]]);
          #1;
          check_all(exp, s == 4, 0);
          if (s < 4 && dr_is_spacer(in_v[4]) && dr_is_valid(co[0])) early_set++;
        end
        // Falling phase.
        order.shuffle();
        for (int s = 0; s < 5; s++) begin
          in_v[order[s]] = DR_SPACER;
          #1;
          check_all(exp, 0, s == 4);
          if (s < 4 && (dr_is_spacer(s0[0]) || dr_is_spacer(s1[0]) || dr_is_spacer(co[0])))
            early_reset++;
        end
      end
    end
    // Redundant against plain carry: A = 1, B = 2, cin = 1, then drop A's LSB.
    in_v[0] = dr_encode(0); in_v[1] = dr_encode(1);
    in_v[2] = dr_encode(1); in_v[3] = dr_encode(0);
    in_v[4] = dr_encode(1);
    #1;
    check_all(3'b100, 1, 0);
    in_v[1] = DR_SPACER;
    #1;
    checks++;
    if (!dr_is_spacer(co[0])) begin failures++; $display("redundant carry did not reset early"); end
    checks++;
    if (co[1] != dr_encode(1)) begin failures++; $display("plain carry did not hold through C-element"); end
    for (int i = 0; i < 5; i++) in_v[i] = DR_SPACER;
    #1;
    check_all(3'b000, 0, 1);

    checks++;
    if (early_set == 0) begin failures++; $display("no early set seen"); end
    checks++;
    if (early_reset == 0) begin failures++; $display("no early reset seen"); end
    $display("early_set=%0d early_reset=%0d", early_set, early_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

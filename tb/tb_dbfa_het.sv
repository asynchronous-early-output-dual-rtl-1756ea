// tb_dbfa_het: self-checking test of the heterogeneously encoded dual-bit adder.
//
// Both carry variants (REDUNDANT = 1 and 0) are instantiated side by side. For
// all 32 combinations of the two 1-of-4 operands and the dual-rail carry-in,
// and several random arrival orders each, the three inputs are raised one at
// a time from spacer and then dropped one at a time. After every step it
// checks that the sum is never more than one-hot, that the carry pair is never
// illegal, that any valid output equals (a + b + cin) computed with integers,
// that all outputs are valid once all inputs are, and spacer once all are
// spacer. It counts early-set (carry valid before the carry-in) and
// early-reset events and checks the release difference between the two carry
// variants.
module tb_dbfa_het;
  import di_pkg::*;

  q4_t a, b;
  dr_t cin;
  q4_t sum [2];
  dr_t co [2];
  int  checks = 0, failures = 0;
  int  early_set = 0, early_reset = 0;

  dbfa_het #(.REDUNDANT(1'b1)) u_red   (.a(a), .b(b), .cin(cin), .sum(sum[0]), .cout(co[0]));
  dbfa_het #(.REDUNDANT(1'b0)) u_plain (.a(a), .b(b), .cin(cin), .sum(sum[1]), .cout(co[1]));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(input logic [2:0] exp, input bit mv, input bit ms);
    for (int k = 0; k < 2; k++) begin
      checks++;
      if (($countones(sum[k]) > 1) || (sum[k] != 0 && sum[k] != q4_encode(exp[1:0])) ||
          (mv && sum[k] == 0) || (ms && sum[k] != 0)) begin
        failures++;
        $display("sum[%0d]=%b expected %b", k, sum[k], q4_encode(exp[1:0]));
      end
      checks++;
      if ((co[k].r1 & co[k].r0) || (dr_is_valid(co[k]) && co[k].r1 != exp[2]) ||
          (mv && !dr_is_valid(co[k])) || (ms && !dr_is_spacer(co[k]))) begin
        failures++;
        $display("cout[%0d]=%b%b expected %b", k, co[k].r1, co[k].r0, exp[2]);
      end
    end
  endtask

  initial begin
    int order [3];
    logic [1:0] va, vb;
    logic vc;
    logic [2:0] exp;
    a = Q4_SPACER; b = Q4_SPACER; cin = DR_SPACER;
    #1;
    check_all(3'b000, 0, 1);
    for (int rep = 0; rep < 8; rep++) begin
      for (int c = 0; c < 32; c++) begin
        va = 2'(c >> 3); vb = 2'(c >> 1); vc = c[0];
        exp = 3'(va + vb + vc);
        order = '{0, 1, 2};
        order.shuffle();
        for (int s = 0; s < 3; s++) begin
          case (order[s])
            0: a = q4_encode(va);
            1: b = q4_encode(vb);
            default: cin = dr_encode(vc);
          endcase
          #1;
          check_all(exp, s == 2, 0);
          if (s < 2 && dr_is_spacer(cin) && dr_is_valid(co[0])) early_set++;
        end
        order.shuffle();
        for (int s = 0; s < 3; s++) begin
          case (order[s])
            0: a = Q4_SPACER;
            1: b = Q4_SPACER;
            default: cin = DR_SPACER;
          endcase
          #1;
          check_all(exp, 0, s == 2);
          if (s < 2 && (sum[0] == 0 || dr_is_spacer(co[0]))) early_reset++;
        end
      end
    end
    // Redundant against plain carry: A = 1, B = 2 (propagate), cin = 1, drop A.
    a = q4_encode(2'd1); b = q4_encode(2'd2); cin = dr_encode(1);
    #1;
    check_all(3'b100, 1, 0);
    a = Q4_SPACER;
    #1;
    checks++;
    if (!dr_is_spacer(co[0])) begin failures++; $display("redundant carry did not reset early"); end
    checks++;
    if (co[1] != dr_encode(1)) begin failures++; $display("plain carry did not hold"); end
    b = Q4_SPACER; cin = DR_SPACER;
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

// tb_rca_het: self-checking test of the heterogeneously encoded ripple carry adder.
//
// Runs the WIDTH-bit adder (default 32, i.e. 16 one-of-four digits per
// operand) in both carry variants side by side on 1200 operand sets, random
// plus corner cases. Each 1-of-4 operand digit and the dual-rail carry-in
// arrive separately in random order, then return to spacer in random order.
// After each step it checks that no sum digit has more than one wire high, that
// the carry-out is never illegal, and that every valid output digit equals the
// matching digit of a + b + cin computed with integers; all outputs must be
// valid once all inputs are and spacer once all inputs are. Counts early-set
// and early-reset events.
module tb_rca_het;
  import di_pkg::*;

  localparam int unsigned W = 32;
  localparam int unsigned D = W / 2;
  localparam int unsigned NIN = 2 * D + 1;

  q4_t [D-1:0] a, b, sum [2];
  dr_t         cin, cout [2];
  int          checks = 0, failures = 0;
  int          early_set = 0, early_reset = 0;

  rca_het #(.WIDTH(W), .REDUNDANT(1'b1)) u_red (
    .a(a), .b(b), .cin(cin), .sum(sum[0]), .cout(cout[0]));
  rca_het #(.WIDTH(W), .REDUNDANT(1'b0)) u_plain (
    .a(a), .b(b), .cin(cin), .sum(sum[1]), .cout(cout[1]));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int check_outputs(input logic [W:0] exp, input bit mv, input bit ms);
    automatic int n_valid = 0;
    for (int k = 0; k < 2; k++) begin
      automatic bit bad = 0;
      for (int i = 0; i < D; i++) begin
        if ($countones(sum[k][i]) > 1) bad = 1;
        if (sum[k][i] != 0 && sum[k][i] != q4_encode(exp[2*i +: 2])) bad = 1;
        if (mv && sum[k][i] == 0) bad = 1;
        if (ms && sum[k][i] != 0) bad = 1;
        if (k == 0 && sum[k][i] != 0) n_valid++;
      end
      if (cout[k].r1 & cout[k].r0) bad = 1;
      if (dr_is_valid(cout[k]) && cout[k].r1 != exp[W]) bad = 1;
      if (mv && !dr_is_valid(cout[k])) bad = 1;
      if (ms && !dr_is_spacer(cout[k])) bad = 1;
      if (k == 0 && dr_is_valid(cout[k])) n_valid++;
      checks++;
      if (bad) begin
        failures++;
        if (failures < 10) $display("variant %0d: sum %h cout %b%b wrong, expected %h",
                                    k, sum[k], cout[k].r1, cout[k].r0, exp);
      end
    end
    return n_valid;
  endfunction

  task automatic apply(input logic [W-1:0] va, input logic [W-1:0] vb, input logic vc);
    automatic logic [W:0] exp = {1'b0, va} + {1'b0, vb} + (W+1)'(vc);
    automatic int order [NIN];
    automatic int nv;
    for (int i = 0; i < NIN; i++) order[i] = i;
    order.shuffle();
    for (int s = 0; s < NIN; s++) begin
      automatic int j = order[s];
      if (j < D)          a[j]     = q4_encode(va[2*j +: 2]);
      else if (j < 2 * D) b[j - D] = q4_encode(vb[2*(j-D) +: 2]);
      else                cin      = dr_encode(vc);
      #1;
      nv = check_outputs(exp, s == NIN - 1, 0);
      if (s == NIN - 2 && nv > 0) early_set++;
    end
    order.shuffle();
    for (int s = 0; s < NIN; s++) begin
      automatic int j = order[s];
      if (j < D)          a[j]     = Q4_SPACER;
      else if (j < 2 * D) b[j - D] = Q4_SPACER;
      else                cin      = DR_SPACER;
      #1;
      nv = check_outputs(exp, 0, s == NIN - 1);
      if (s == NIN - 2 && nv < D + 1) early_reset++;
    end
  endtask

  initial begin
    a = '0; b = '0; cin = DR_SPACER;
    #1;
    void'(check_outputs('0, 0, 1));
    apply('1, '0, 1'b1);
    apply('1, '1, 1'b1);
    apply('0, '0, 1'b0);
    apply({(W/2){2'b10}}, {(W/2){2'b01}}, 1'b1);
    for (int n = 0; n < 1196; n++)
      apply(W'({$urandom(), $urandom()}), W'({$urandom(), $urandom()}), 1'($urandom_range(1)));
    checks++;
    if (early_set == 0) begin failures++; $display("no early set seen"); end
    checks++;
    if (early_reset == 0) begin failures++; $display("no early reset seen"); end
    $display("early_set=%0d early_reset=%0d", early_set, early_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

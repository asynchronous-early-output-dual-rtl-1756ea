// tb_rca_hom: self-checking test of the homogeneously encoded ripple carry adder.
//
// Runs the WIDTH-bit adder (default 32) in both carry variants side by side on
// 1200 operand sets: random ones plus corner cases (all ones plus carry, zero,
// alternating patterns). Every operand and carry-in bit arrives separately in
// a random order; after each arrival, and after each bit's later return to
// spacer, it checks that no output is illegal and that every valid output bit
// equals the bit of a + b + cin computed with a WIDTH+1-bit integer add. Once
// all inputs are valid every output must be valid; once all are spacer, every
// output must be spacer. Counts how often outputs were valid early (before the
// last input) and reset early (before the last input left).
module tb_rca_hom;
  import di_pkg::*;

  localparam int unsigned W = 32;
  localparam int unsigned NIN = 2 * W + 1;

  dr_t [W-1:0] a, b, sum [2];
  dr_t         cin, cout [2];
  int          checks = 0, failures = 0;
  int          early_set = 0, early_reset = 0;

  rca_hom #(.WIDTH(W), .REDUNDANT(1'b1)) u_red (
    .a(a), .b(b), .cin(cin), .sum(sum[0]), .cout(cout[0]));
  rca_hom #(.WIDTH(W), .REDUNDANT(1'b0)) u_plain (
    .a(a), .b(b), .cin(cin), .sum(sum[1]), .cout(cout[1]));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Returns the number of valid output bits of variant 0.
  function automatic int check_outputs(input logic [W:0] exp, input bit mv, input bit ms);
    automatic int n_valid = 0;
    for (int k = 0; k < 2; k++) begin
      automatic dr_t [W:0] o = {cout[k], sum[k]};
      automatic bit bad = 0;
      for (int i = 0; i <= W; i++) begin
        if (o[i].r1 & o[i].r0) bad = 1;
        if (dr_is_valid(o[i]) && o[i].r1 != exp[i]) bad = 1;
        if (mv && !dr_is_valid(o[i])) bad = 1;
        if (ms && !dr_is_spacer(o[i])) bad = 1;
        if (k == 0 && dr_is_valid(o[i])) n_valid++;
      end
      checks++;
      if (bad) begin
        failures++;
        if (failures < 10) $display("variant %0d: output %h wrong for expected %h", k, o, exp);
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
      if (j < W)          a[j]     = dr_encode(va[j]);
      else if (j < 2 * W) b[j - W] = dr_encode(vb[j - W]);
      else                cin      = dr_encode(vc);
      #1;
      nv = check_outputs(exp, s == NIN - 1, 0);
      if (s == NIN - 2 && nv > 0) early_set++;
    end
    order.shuffle();
    for (int s = 0; s < NIN; s++) begin
      automatic int j = order[s];
      if (j < W)          a[j]     = DR_SPACER;
      else if (j < 2 * W) b[j - W] = DR_SPACER;
      else                cin      = DR_SPACER;
      #1;
      nv = check_outputs(exp, 0, s == NIN - 1);
      if (s == NIN - 2 && nv < W + 1) early_reset++;
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

// tb_eo_dbfa_rca_top: end-to-end test of both adder stages at full size.
//
// The top is instantiated with its default parameters (32-bit adders,
// redundant carry logic). Each of its two stages gets its own
// transmitter/receiver model (dr_channel_env), which sends 1100 operand sets
// through the complete 4-phase handshake and checks every result against an
// integer add. The two channels run concurrently. At the end each mechanism
// must have occurred at least once per stage: early set, early reset, the
// input register holding a token after the transmitter went to spacer, and a
// carry rippling through all 16 dual-bit cells. A watchdog catches a
// deadlocked handshake.
module tb_eo_dbfa_rca_top;
  import di_pkg::*;

  localparam int unsigned W  = 32;
  localparam int unsigned NT = 1100;

  logic rst;

  dr_t [W-1:0] hom_a, hom_b, hom_sum, het_a, het_b, het_sum;
  dr_t         hom_cin, hom_cout, het_cin, het_cout;
  logic        hom_ackout, hom_rx_ack, het_ackout, het_rx_ack;

  logic hom_fin, het_fin;
  int   hom_checks, hom_fail, hom_tr, hom_es, hom_er, hom_hold, hom_rip;
  int   het_checks, het_fail, het_tr, het_es, het_er, het_hold, het_rip;
  int   checks = 0, failures = 0;

  eo_dbfa_rca_top dut (
    .rst       (rst),
    .hom_a     (hom_a),   .hom_b     (hom_b),   .hom_cin   (hom_cin),
    .hom_ackout(hom_ackout), .hom_rx_ack(hom_rx_ack),
    .hom_sum   (hom_sum), .hom_cout  (hom_cout),
    .het_a     (het_a),   .het_b     (het_b),   .het_cin   (het_cin),
    .het_ackout(het_ackout), .het_rx_ack(het_rx_ack),
    .het_sum   (het_sum), .het_cout  (het_cout)
  );

  dr_channel_env #(.W(W), .NTRANS(NT)) u_hom_env (
    .rst(rst), .a(hom_a), .b(hom_b), .cin(hom_cin), .ackout(hom_ackout),
    .rx_ack(hom_rx_ack), .sum(hom_sum), .cout(hom_cout), .finished(hom_fin),
    .checks(hom_checks), .failures(hom_fail), .n_trans(hom_tr),
    .n_early_set(hom_es), .n_early_reset(hom_er), .n_hold(hom_hold),
    .n_full_ripple(hom_rip));

  dr_channel_env #(.W(W), .NTRANS(NT)) u_het_env (
    .rst(rst), .a(het_a), .b(het_b), .cin(het_cin), .ackout(het_ackout),
    .rx_ack(het_rx_ack), .sum(het_sum), .cout(het_cout), .finished(het_fin),
    .checks(het_checks), .failures(het_fail), .n_trans(het_tr),
    .n_early_set(het_es), .n_early_reset(het_er), .n_hold(het_hold),
    .n_full_ripple(het_rip));

  // 4-phase rule at the stage boundary: ACKOUT may only rise while the
  // receiver has not yet acknowledged the previous token's spacer, i.e. the
  // register never holds a new token while the receiver still acknowledges.
  property p_no_token_while_acked(logic ackout, logic rx_ack);
    @(posedge ackout) !rx_ack;
  endproperty
  a_hom_hs: assert property (p_no_token_while_acked(hom_ackout, hom_rx_ack));
  a_het_hs: assert property (p_no_token_while_acked(het_ackout, het_rx_ack));

  task automatic need(input int n, input string what);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never seen: %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired: hom %0d, het %0d transactions", hom_tr, het_tr);
    $display("TB_RESULT checks=%0d failures=%0d", checks + hom_checks + het_checks,
             failures + hom_fail + het_fail);
    $finish;
  end

  initial begin
    rst = 1'b1;
    #5;
    rst = 1'b0;
    wait (hom_fin && het_fin);
    #20;
    checks++;
    if (hom_tr != NT || het_tr != NT) begin
      failures++;
      $display("transaction count hom %0d het %0d, expected %0d", hom_tr, het_tr, NT);
    end
    need(hom_es, "hom early set");     need(het_es, "het early set");
    need(hom_er, "hom early reset");   need(het_er, "het early reset");
    need(hom_hold, "hom register hold"); need(het_hold, "het register hold");
    need(hom_rip, "hom full carry ripple"); need(het_rip, "het full carry ripple");
    $display("simulated time %0t", $time);
    $display("hom: transactions=%0d early_set=%0d early_reset=%0d hold=%0d full_ripple=%0d",
             hom_tr, hom_es, hom_er, hom_hold, hom_rip);
    $display("het: transactions=%0d early_set=%0d early_reset=%0d hold=%0d full_ripple=%0d",
             het_tr, het_es, het_er, het_hold, het_rip);
    $display("TB_RESULT checks=%0d failures=%0d", checks + hom_checks + het_checks,
             failures + hom_fail + het_fail);
    $finish;
  end

endmodule

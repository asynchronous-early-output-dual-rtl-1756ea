// dr_channel_env: behavioural transmitter and receiver for one adder stage
// (testbench only).
//
// The transmitter sends NTRANS operand sets {a, b, cin} as dual-rail tokens
// under the 4-phase return-to-zero protocol: it waits for the stage's ACKOUT
// to be low, raises the 2*W+1 input bits one at a time in random order with
// random gaps, waits for ACKOUT high, then returns the bits to spacer in
// random order. The first operand sets are corner cases (full carry ripple,
// zero, all ones), the rest random.
//
// The receiver plays the next stage: it waits until every sum bit and the
// carry-out are valid, compares them with a + b + cin computed here with
// integers, raises its acknowledge after a random delay, waits until all
// outputs are spacer and the stage's ACKOUT is low (its input register is
// empty again), then lowers the acknowledge after a random delay. Waiting for
// ACKOUT stands for the timing assumption an early output stage needs: its
// outputs can be spacer before all its input rails are, and a new token must
// not be admitted until the input register is empty. A monitor
// checks every time step that no output pair is illegal.
//
// It counts the mechanisms of the design as seen from outside: early set
// (some output valid before ACKOUT rose, i.e. before the stage had all its
// inputs), early reset (some output back to spacer while ACKOUT was still
// high), register hold (the transmitter already at spacer while the outputs
// still hold the token), and full-length carry propagation.
module dr_channel_env
  import di_pkg::*;
#(
  parameter int unsigned W      = 32,
  parameter int unsigned NTRANS = 1000,
  parameter int unsigned MAXGAP = 3
) (
  input  logic         rst,
  output dr_t [W-1:0]  a,
  output dr_t [W-1:0]  b,
  output dr_t          cin,
  input  logic         ackout,
  output logic         rx_ack,
  input  dr_t [W-1:0]  sum,
  input  dr_t          cout,
  output logic         finished,
  output int           checks,
  output int           failures,
  output int           n_trans,
  output int           n_early_set,
  output int           n_early_reset,
  output int           n_hold,
  output int           n_full_ripple
);

  localparam int unsigned NIN = 2 * W + 1;

  logic [W:0] exp_q [$];
  bit         saw_early_set, saw_early_reset, saw_hold;

  function automatic bit all_valid();
    for (int i = 0; i < W; i++) if (!dr_is_valid(sum[i])) return 0;
    return dr_is_valid(cout);
  endfunction

  function automatic bit all_spacer();
    for (int i = 0; i < W; i++) if (!dr_is_spacer(sum[i])) return 0;
    return dr_is_spacer(cout);
  endfunction

  function automatic bit any_valid();
    for (int i = 0; i < W; i++) if (dr_is_valid(sum[i])) return 1;
    return dr_is_valid(cout);
  endfunction

  function automatic bit inputs_spacer();
    for (int i = 0; i < W; i++) if (!dr_is_spacer(a[i]) || !dr_is_spacer(b[i])) return 0;
    return dr_is_spacer(cin);
  endfunction

  // Transmitter.
  initial begin
    automatic logic [W-1:0] va, vb;
    automatic logic         vc;
    automatic int           order [NIN];
    a = '0; b = '0; cin = DR_SPACER;
    finished = 1'b0;
    n_full_ripple = 0;
    @(negedge rst);
    for (int n = 0; n < NTRANS; n++) begin
      case (n)
        0:       begin va = '1; vb = '0; vc = 1'b1; end
        1:       begin va = {(W/2){2'b10}}; vb = {(W/2){2'b01}}; vc = 1'b1; end
        2:       begin va = '0; vb = '0; vc = 1'b0; end
        3:       begin va = '1; vb = '1; vc = 1'b1; end
        default: begin
          va = W'({$urandom(), $urandom()});
          vb = W'({$urandom(), $urandom()});
          vc = 1'($urandom_range(1));
        end
      endcase
      if ((va ^ vb) == '1 && vc) n_full_ripple++;
      exp_q.push_back({1'b0, va} + {1'b0, vb} + (W+1)'(vc));
      wait (ackout == 1'b0);
      for (int i = 0; i < NIN; i++) order[i] = i;
      order.shuffle();
      for (int s = 0; s < NIN; s++) begin
        automatic int j = order[s];
        #($urandom_range(MAXGAP));
        if (j < W)          a[j]     = dr_encode(va[j]);
        else if (j < 2 * W) b[j - W] = dr_encode(vb[j - W]);
        else                cin      = dr_encode(vc);
      end
      wait (ackout == 1'b1);
      order.shuffle();
      for (int s = 0; s < NIN; s++) begin
        automatic int j = order[s];
        #($urandom_range(MAXGAP));
        if (j < W)          a[j]     = DR_SPACER;
        else if (j < 2 * W) b[j - W] = DR_SPACER;
        else                cin      = DR_SPACER;
      end
    end
    wait (ackout == 1'b0);
    finished = 1'b1;
  end

  // Receiver.
  initial begin
    rx_ack = 1'b0;
    checks = 0;
    failures = 0;
    n_trans = 0;
    @(negedge rst);
    forever begin
      automatic logic [W:0] exp, got;
      while (!all_valid()) #1;
      #0;
      exp = exp_q.pop_front();
      for (int i = 0; i < W; i++) got[i] = sum[i].r1;
      got[W] = cout.r1;
      checks++;
      if (got !== exp) begin
        failures++;
        if (failures < 10) $display("%m: sum %h expected %h", got, exp);
      end
      n_trans++;
      // A slow receiver now and then, so that the register has to hold the
      // token after the transmitter has gone to spacer.
      if ($urandom_range(3) == 0) #(NIN * (MAXGAP + 1));
      else                        #($urandom_range(4 * MAXGAP));
      rx_ack = 1'b1;
      while (!all_spacer()) #1;
      // Early output: the sums can be spacer before every input rail of the
      // stage is. The next token must not be admitted before the input
      // register is empty, so the receiver also waits for ACKOUT low.
      wait (ackout == 1'b0);
      #($urandom_range(4 * MAXGAP));
      rx_ack = 1'b0;
    end
  end

  // Monitor: legality every step, mechanism counters once per token.
  initial begin
    n_early_set = 0; n_early_reset = 0; n_hold = 0;
    saw_early_set = 0; saw_early_reset = 0; saw_hold = 0;
    @(negedge rst);
    forever begin
      #1;
      for (int i = 0; i <= W; i++) begin
        automatic dr_t o = (i == W) ? cout : sum[i];
        if (o.r1 & o.r0) begin
          failures++;
          $display("%m: illegal output bit %0d", i);
        end
      end
      if (!ackout && !rx_ack && any_valid()) saw_early_set = 1;
      if (ackout && rx_ack && !all_valid()) saw_early_reset = 1;
      if (!rx_ack && all_valid() && inputs_spacer()) saw_hold = 1;
      if (rx_ack && all_spacer() && !ackout) begin
        n_early_set   += int'(saw_early_set);
        n_early_reset += int'(saw_early_reset);
        n_hold        += int'(saw_hold);
        saw_early_set = 0; saw_early_reset = 0; saw_hold = 0;
      end
    end
  end

endmodule

// tb_dr_register: self-checking test of the 4-phase dual-rail input register.
//
// After reset the outputs must be spacer. Each round: with ACKIN high, data
// bits arrive one at a time and each must appear at the output at once; while
// ACKIN stays high the transmitter's spacer must not pass (the token is held);
// after ACKIN falls the spacer passes; while ACKIN is low, a new token on the
// input must not pass, and it passes once ACKIN rises again (start of the next
// round).
module tb_dr_register;
  import di_pkg::*;

  localparam int unsigned N = 65;

  logic        rst, ackin;
  dr_t [N-1:0] d, q, token;
  int          checks = 0, failures = 0;

  dr_register #(.N(N)) dut (.rst(rst), .ackin(ackin), .d(d), .q(q));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_q(input dr_t [N-1:0] want, input string what);
    checks++;
    if (q !== want) begin
      failures++;
      if (failures < 10) $display("%s: q=%h expected %h", what, q, want);
    end
  endtask

  initial begin
    int order [N];
    rst = 1'b1; ackin = 1'b1; d = '0;
    #1;
    expect_q('0, "reset");
    rst = 1'b0;
    #1;
    expect_q('0, "after reset");
    for (int rep = 0; rep < 100; rep++) begin
      for (int i = 0; i < N; i++) begin
        order[i] = i;
        token[i] = dr_encode(1'($urandom_range(1)));
      end
      order.shuffle();
      for (int s = 0; s < N; s++) begin
        d[order[s]] = token[order[s]];
        #1;
        expect_q(d, "data passing");
      end
      // Transmitter returns to spacer before the acknowledge: must hold.
      d = '0;
      #1;
      expect_q(token, "hold token");
      ackin = 1'b0;
      #1;
      expect_q('0, "spacer passes");
      // Next token while ACKIN is low: must wait.
      d = token;
      #1;
      expect_q('0, "hold spacer");
      d = '0;
      #1;
      ackin = 1'b1;
      #1;
      expect_q('0, "empty");
    end
    // Reset in the middle of a token clears it.
    d = token;
    #1;
    rst = 1'b1;
    #1;
    expect_q('0, "reset clears");
    rst = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_dr_to_1of4: self-checking test of the dual-rail to 1-of-4 encoder.
//
// For each of the four bit pairs and both arrival orders it checks that no
// output rises while only one bit has arrived, that the right wire
// (E[2x+y]) rises once both have, that it stays up while only one bit has
// returned to spacer, and that the output is spacer once both have.
module tb_dr_to_1of4;
  import di_pkg::*;

  dr_t x, y;
  q4_t e;
  int  checks = 0, failures = 0;

  dr_to_1of4 dut (.x(x), .y(y), .e(e));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_e(input q4_t want, input string what);
    checks++;
    if (e !== want) begin
      failures++;
      $display("%s: e=%b expected %b", what, e, want);
    end
  endtask

  initial begin
    x = DR_SPACER; y = DR_SPACER;
    #1;
    expect_e(4'b0000, "reset");
    for (int v = 0; v < 4; v++) begin
      for (int first = 0; first < 2; first++) begin
        if (first == 0) x = dr_encode(v[1]); else y = dr_encode(v[0]);
        #1; expect_e(4'b0000, "one bit in");
        if (first == 0) y = dr_encode(v[0]); else x = dr_encode(v[1]);
        #1; expect_e(q4_encode(2'(v)), "both in");
        if (first == 0) y = DR_SPACER; else x = DR_SPACER;
        #1; expect_e(q4_encode(2'(v)), "one bit out");
        if (first == 0) x = DR_SPACER; else y = DR_SPACER;
        #1; expect_e(4'b0000, "both out");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

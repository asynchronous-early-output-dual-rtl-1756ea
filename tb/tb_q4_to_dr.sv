// tb_q4_to_dr: self-checking test of the 1-of-4 to dual-rail decoder.
//
// Applies every 1-of-4 digit, with spacer between, and checks both dual-rail
// outputs against the two bits of the digit's value.
module tb_q4_to_dr;
  import di_pkg::*;

  q4_t e;
  dr_t x, y;
  int  checks = 0, failures = 0;

  q4_to_dr dut (.e(e), .x(x), .y(y));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 4; rep++) begin
      for (int v = 0; v < 4; v++) begin
        e = Q4_SPACER;
        #1;
        checks++;
        if (!dr_is_spacer(x) || !dr_is_spacer(y)) begin
          failures++; $display("spacer not decoded to spacer");
        end
        e = q4_encode(2'(v));
        #1;
        checks++;
        if (x != dr_encode(v[1]) || y != dr_encode(v[0])) begin
          failures++;
          $display("value %0d: x=%b%b y=%b%b", v, x.r1, x.r0, y.r1, y.r0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

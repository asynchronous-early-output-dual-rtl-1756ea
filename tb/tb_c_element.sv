// tb_c_element: self-checking test of the 2-input C-element.
//
// Walks the inputs through random sequences and compares the output with a
// reference that applies the C-element rule (follow when equal, hold when
// different) to the previous reference value. Starts from both inputs low,
// which defines the state.
module tb_c_element;

  logic a, b, q;
  logic ref_q;
  int   checks = 0, failures = 0;

  c_element dut (.a(a), .b(b), .q(q));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int n_hold = 0;
    a = 1'b0; b = 1'b0; ref_q = 1'b0;
    #1;
    for (int i = 0; i < 2000; i++) begin
      a = 1'($urandom_range(1));
      b = 1'($urandom_range(1));
      if (a == b) ref_q = a;
      else        n_hold++;
      #1;
      checks++;
      if (q !== ref_q) begin
        failures++;
        $display("mismatch a=%b b=%b q=%b expected %b", a, b, q, ref_q);
      end
    end
    // Explicit hold in both directions.
    a = 1; b = 1; #1; a = 0; #1;
    checks++; if (q !== 1'b1) begin failures++; $display("did not hold 1"); end
    b = 0; #1; a = 1; #1;
    checks++; if (q !== 1'b0) begin failures++; $display("did not hold 0"); end
    checks++;
    if (n_hold == 0) begin failures++; $display("no hold case exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

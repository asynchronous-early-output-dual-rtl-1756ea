// tb_completion_detector: self-checking test of the completion detector.
//
// With the default 65 dual-rail inputs (the size a 32-bit adder stage needs),
// raises the inputs one by one in random order with random data and checks
// that done stays low until the last one has arrived and is high after it;
// then drops them in random order and checks done stays high until the last
// one is spacer and low after it.
module tb_completion_detector;
  import di_pkg::*;

  localparam int unsigned N = 65;

  dr_t [N-1:0] d;
  logic        done;
  int          checks = 0, failures = 0;

  completion_detector #(.N(N)) dut (.d(d), .done(done));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int order [N];
    d = '0;
    #1;
    checks++;
    if (done !== 1'b0) begin failures++; $display("done high at start"); end
    for (int rep = 0; rep < 200; rep++) begin
      for (int i = 0; i < N; i++) order[i] = i;
      order.shuffle();
      for (int s = 0; s < N; s++) begin
        d[order[s]] = dr_encode(1'($urandom_range(1)));
        #1;
        checks++;
        if (done !== (s == N - 1)) begin
          failures++; $display("rise: done=%b after %0d of %0d inputs", done, s + 1, N);
        end
      end
      order.shuffle();
      for (int s = 0; s < N; s++) begin
        d[order[s]] = DR_SPACER;
        #1;
        checks++;
        if (done !== (s != N - 1)) begin
          failures++; $display("fall: done=%b after %0d of %0d spacers", done, s + 1, N);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// completion_detector: detects that a dual-rail bus is completely valid or
// completely spacer.
//
// As in the paper, the two rails of every dual-rail signal are ORed, and the
// N OR outputs are joined by an N-input C-element decomposed into a tree of
// 2-input C-elements (c_tree). done rises once every signal carries data and
// falls once every signal has returned to spacer; while the bus is partly
// valid it holds its previous value. In a stage, done is the acknowledge sent
// back to the transmitter.
//
// Timing: no clock; one OR plus ceil(log2 N) C-element delays.
module completion_detector
  import di_pkg::*;
#(
  parameter int unsigned N = 65
) (
  input  dr_t [N-1:0] d,
  output logic        done
);

  logic [N-1:0] any;

  for (genvar i = 0; i < N; i++) begin : g_or
    assign any[i] = d[i].r1 | d[i].r0;
  end

  c_tree #(.N(N)) u_tree (.x(any), .y(done));

endmodule

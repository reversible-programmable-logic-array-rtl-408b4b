// fy_fanout: reversible fan-out of one signal into COPIES copies.
//
// Reversible logic forbids plain fan-out, so a signal is copied with Feynman
// gates used as data copiers (IN2 = 0). The gates form a chain: gate g takes
// the running signal on IN1, passes it on at OUT1 to gate g+1, and emits a
// copy at OUT2. COPIES-1 gates give COPIES copies (the last copy is the OUT1
// of the final gate), with no garbage output and COPIES-1 constant inputs.
// For COPIES = 1 no gate is needed and the single copy is the signal itself.
//
// Interface: a -> y[COPIES-1:0], all equal to a. Combinational.
module fy_fanout #(
  parameter int unsigned COPIES = 4
) (
  input  logic              a,
  output logic [COPIES-1:0] y
);

  if (COPIES == 1) begin : g_single
    assign y[0] = a;
  end else begin : g_chain
    logic [COPIES-1:0] run;  // run[g] is the signal entering gate g
    assign run[0] = a;
    for (genvar g = 0; g < COPIES - 1; g++) begin : g_copy
      feynman_gate u_copy (
        .in1 (run[g]),
        .in2 (1'b0),
        .out1(run[g+1]),
        .out2(y[g])
      );
    end
    assign y[COPIES-1] = run[COPIES-1];
  end

endmodule

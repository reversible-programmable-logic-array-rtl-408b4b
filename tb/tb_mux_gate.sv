// tb_mux_gate: exhaustive self-checking test of the 3x3 reversible MUX gate.
//
// For all eight inputs the outputs are compared with values worked out as
// P = A, Q = parity of the three inputs, R = (A ? B : C), i.e. R written as a
// multiplexer rather than the gate's xor form. It further checks that the
// eight output words are all different (reversible), the AND use (IN3 = 0 gives
// R = A and B), the OR use (IN2 = 1 gives R = A or C) and that Q with IN2 = 1
// is the XNOR of A and C, not their OR. The gate is described elsewhere as
// conservative (ones count preserved), but with Q = A xor B xor C it is not
// (input 001 gives 011); the test counts how many input words keep their
// ones count and expects the four that the equations give.
module tb_mux_gate;

  logic in1, in2, in3, out1, out2, out3;
  int   checks = 0, failures = 0;

  mux_gate dut (.in1(in1), .in2(in2), .in3(in3),
                .out1(out1), .out2(out2), .out3(out3));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (in=%b%b%b -> out=%b%b%b)", what, in1, in2, in3, out1, out2, out3);
    end
  endtask

  initial begin : watchdog
    #10_000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [7:0] seen;
    bit a, b, c;
    int n_same_weight;
    seen = '0;
    n_same_weight = 0;
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      {in1, in2, in3} = {a, b, c};
      #1;
      check(out1 == a, "P = A");
      check(out2 == ((a + b + c) % 2 == 1), "Q = A xor B xor C");
      check(out3 == (a ? b : c), "R = A'C xor AB");
      if ($countones({out1, out2, out3}) == $countones({a, b, c})) n_same_weight++;
      seen[{out1, out2, out3}] = 1'b1;
      if (c == 1'b0) check(out3 == (a && b), "AND use (C = 0)");
      if (b == 1'b1) begin
        check(out3 == (a || c), "OR use (B = 1) on R");
        check(out2 == (a == c), "Q with B = 1 is XNOR");
      end
    end
    check(n_same_weight == 4, "ones count kept for exactly 000, 010, 110, 111");
    checks++;
    if (seen != 8'hFF) begin
      failures++;
      $display("FAIL: outputs are not a permutation of the inputs (seen=%b)", seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

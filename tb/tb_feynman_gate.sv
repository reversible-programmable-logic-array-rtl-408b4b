// tb_feynman_gate: exhaustive self-checking test of the 2x2 Feynman gate.
//
// Drives all four input pairs and compares with a truth table written out
// by hand (P = A, Q = A xor B). Also checks the two uses of the gate with a
// constant on IN2 (copier and inverter) and that the four output pairs are
// all different, i.e. the gate is a bijection and so reversible.
module tb_feynman_gate;

  logic in1, in2, out1, out2;
  int   checks = 0, failures = 0;

  feynman_gate dut (.in1(in1), .in2(in2), .out1(out1), .out2(out2));

  // expected {out1, out2} indexed by {in1, in2}
  localparam logic [1:0] EXPECT [4] = '{2'b00, 2'b01, 2'b11, 2'b10};

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (in1=%b in2=%b -> out1=%b out2=%b)", what, in1, in2, out1, out2);
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
    bit [3:0] seen;
    seen = '0;
    for (int v = 0; v < 4; v++) begin
      {in1, in2} = 2'(v);
      #1;
      check({out1, out2} == EXPECT[v], "truth table");
      seen[{out1, out2}] = 1'b1;
    end
    checks++;
    if (seen != 4'b1111) begin
      failures++;
      $display("FAIL: outputs are not a permutation of the inputs (seen=%b)", seen);
    end
    // data copier: IN2 = 0 gives two copies of IN1
    for (int a = 0; a < 2; a++) begin
      in1 = 1'(a); in2 = 1'b0; #1;
      check(out1 == 1'(a) && out2 == 1'(a), "copier");
    end
    // inverter: IN2 = 1 gives IN1 and its complement
    for (int a = 0; a < 2; a++) begin
      in1 = 1'(a); in2 = 1'b1; #1;
      check(out1 == 1'(a) && out2 == !a, "inverter");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

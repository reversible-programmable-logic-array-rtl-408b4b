// tb_rev_or_plane: self-checking test of the reversible OR plane.
//
// The three-term plane (two MUX gates, as in the published schematic) is
// driven with all eight words, starting with A = B = C = 1, which must give
// O = 1 as in the published OR-plane simulation. The output must be the OR of
// the terms and each garbage pair must be (IN1, IN1 xor 1 xor IN3) of its
// gate. An eight-term plane, the size used inside the RPLA, is checked over
// all 256 input words.
module tb_rev_or_plane;

  logic [2:0]  t3;
  logic        o3;
  logic [3:0]  g3;
  logic [7:0]  t8;
  logic        o8;
  logic [13:0] g8;
  int checks = 0, failures = 0;

  rev_or_plane dut3 (.term(t3), .o(o3), .garbage(g3));
  rev_or_plane #(.N_TERMS(8)) dut8 (.term(t8), .o(o8), .garbage(g8));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (t3=%b o3=%b g3=%b t8=%b o8=%b)", what, t3, o3, g3, t8, o8);
    end
  endtask

  initial begin : watchdog
    #100_000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit a, b, c, ab;
    t3 = 3'b111; #1;
    check(o3 == 1'b1, "A=B=C=1 gives O=1");
    for (int v = 0; v < 8; v++) begin
      t3 = 3'(v); #1;
      {c, b, a} = 3'(v);          // term[0] = A, term[1] = B, term[2] = C
      ab = a || b;
      check(o3 == (v != 0), "O = A + B + C");
      check(g3[0] == a && g3[1] == !(a ^ b), "garbage gate 0");
      check(g3[2] == ab && g3[3] == !(ab ^ c), "garbage gate 1");
    end
    for (int v = 0; v < 256; v++) begin
      t8 = 8'(v); #1;
      check(o8 == (v != 0), "8-term OR");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_rev_and_plane: self-checking test of the reversible AND plane.
//
// The three-input plane is driven with all eight input words; minterm i must
// be 1 exactly for x = i. The first word applied is A=1, B=0, C=0, which must
// raise O4 alone, as in the published AND-plane simulation. The garbage
// outputs are checked gate by gate against the MUX gate's OUT1 = IN1 and
// OUT2 = IN1 xor IN2 (with the literals each gate should see), and the full
// output word {minterm, garbage} must differ for every input, so the
// inputs can be recovered. A four-input plane (16 minterms) is checked the
// same way for its minterms, and the garbage width of both is compared with
// the count 2 * (n-1) * 2^n.
module tb_rev_and_plane;

  logic [2:0]  x3;
  logic [7:0]  m3;
  logic [31:0] g3;
  logic [3:0]  x4;
  logic [15:0] m4;
  logic [95:0] g4;
  int checks = 0, failures = 0;

  rev_and_plane dut3 (.x(x3), .minterm(m3), .garbage(g3));
  rev_and_plane #(.N_IN(4)) dut4 (.x(x4), .minterm(m4), .garbage(g4));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (x3=%b m3=%b x4=%b m4=%b)", what, x3, m3, x4, m4);
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
    logic [39:0] outs [8];
    bit a, b, c, lit_a, lit_b, p1;
    check($bits(g3) == 2 * 2 * 8 && $bits(g4) == 2 * 3 * 16, "garbage widths");
    // published stimulus: A=1, B=0, C=0 -> O4 = 1, all others 0
    x3 = 3'b100; #1;
    check(m3 == 8'b0001_0000, "A=1 B=0 C=0 gives O4 only");
    for (int v = 0; v < 8; v++) begin
      x3 = 3'(v); #1;
      {a, b, c} = 3'(v);
      for (int i = 0; i < 8; i++)
        check(m3[i] == (v == i), $sformatf("minterm %0d", i));
      // gate 0 of minterm i ANDs the A and B literals, gate 1 the product with C
      for (int i = 0; i < 8; i++) begin
        lit_a = i[2] ? a : !a;
        lit_b = i[1] ? b : !b;
        p1    = lit_a && lit_b;
        check(g3[4*i]   == lit_a,          $sformatf("garbage OUT1 gate0 m%0d", i));
        check(g3[4*i+1] == (lit_a ^ lit_b), $sformatf("garbage OUT2 gate0 m%0d", i));
        check(g3[4*i+2] == p1,             $sformatf("garbage OUT1 gate1 m%0d", i));
        check(g3[4*i+3] == (p1 ^ (i[0] ? c : !c)), $sformatf("garbage OUT2 gate1 m%0d", i));
      end
      outs[v] = {m3, g3};
    end
    for (int v = 0; v < 8; v++)
      for (int w = v + 1; w < 8; w++)
        check(outs[v] != outs[w], "output words distinct (reversible)");
    for (int v = 0; v < 16; v++) begin
      x4 = 4'(v); #1;
      check(m4 == 16'(1) << v, $sformatf("4-input minterms for x=%0d", v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

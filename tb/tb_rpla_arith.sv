// tb_rpla_arith: the RPLA at its default size used as a full adder and then,
// after reprogramming, as a full subtractor.
//
// The program words are built from integer arithmetic: for every input word
// {A, B, Cin} the sum and carry of A + B + Cin (then the difference and
// borrow of A - B - Bin) are written into bit x of the two program words.
// The outputs are then compared with the same arithmetic for all inputs:
// output 0 carries the sum (difference), output 1 the carry (borrow).
module tb_rpla_arith;

  logic [2:0]      x;
  logic [1:0][7:0] prog;
  logic [1:0]      f;
  logic [91:0]     garbage;
  int checks = 0, failures = 0;

  rpla dut (.x(x), .prog(prog), .f(f), .garbage(garbage));

  initial begin : watchdog
    #100_000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a, b, c, r;
    // ---- full adder ----
    for (int v = 0; v < 8; v++) begin
      a = v >> 2 & 1; b = v >> 1 & 1; c = v & 1;
      r = a + b + c;
      prog[0][v] = 1'(r);        // sum
      prog[1][v] = 1'(r >> 1);   // carry
    end
    for (int v = 0; v < 8; v++) begin
      x = 3'(v); #1;
      a = v >> 2 & 1; b = v >> 1 & 1; c = v & 1;
      checks++;
      if (2 * f[1] + f[0] != a + b + c) begin
        failures++;
        $display("FAIL: full adder %0d+%0d+%0d gave carry=%b sum=%b", a, b, c, f[1], f[0]);
      end
    end
    // ---- full subtractor ----
    for (int v = 0; v < 8; v++) begin
      a = v >> 2 & 1; b = v >> 1 & 1; c = v & 1;
      r = a - b - c;             // -2 .. 1
      prog[0][v] = 1'(r);        // difference
      prog[1][v] = r < 0;        // borrow
    end
    for (int v = 0; v < 8; v++) begin
      x = 3'(v); #1;
      a = v >> 2 & 1; b = v >> 1 & 1; c = v & 1;
      checks++;
      if (int'(f[0]) - 2 * int'(f[1]) != a - b - c) begin
        failures++;
        $display("FAIL: full subtractor %0d-%0d-%0d gave borrow=%b diff=%b", a, b, c, f[1], f[0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

// tb_rpla: end-to-end self-checking test of the RPLA at its default size
// (three inputs, two outputs, eight product terms).
//
// Output 0 is programmed in turn with every one of the 256 truth tables of
// three variables; output 1 gets a random truth table each time. After each
// reprogramming all eight input words are applied and every output must
// equal bit x of its program word. The garbage port must have its computed
// width and, for a fixed program, the complete output word must differ for
// every input word (the array is reversible once garbage is kept). The
// package's quantum-cost formula is compared with a count done by hand.
//
// Mechanisms counted, each of which must occur at least once:
//   reprogram     - the program word of an output changed
//   term_pass[i]  - minterm i was active and its switch programmed on
//   term_block    - a minterm was active but its switch programmed off
//   out_high / out_low - an output evaluated to 1 / to 0
module tb_rpla;

  localparam int N_IN = 3, M_OUT = 2, K = 8, NGARB = 92;

  logic [N_IN-1:0]         x;
  logic [M_OUT-1:0][K-1:0] prog;
  logic [M_OUT-1:0]        f;
  logic [NGARB-1:0]        garbage;
  int checks = 0, failures = 0;
  int n_reprogram = 0, n_term_block = 0, n_out_high = 0, n_out_low = 0;
  int n_term_pass [K];

  rpla dut (.x(x), .prog(prog), .f(f), .garbage(garbage));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (x=%b prog=%h f=%b)", what, x, prog, f);
    end
  endtask

  task automatic mechanism(input int count, input string name);
    checks++;
    if (count == 0) begin
      failures++;
      $display("FAIL: mechanism %s never happened", name);
    end else
      $display("mechanism %-12s happened %0d times", name, count);
  endtask

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [M_OUT-1:0][K-1:0] prev;
    logic [M_OUT+NGARB-1:0]  word [K];
    check($bits(garbage) == 2 * 2 * 8 + 2 * (2 * 8 + 2 * 7), "garbage width");
    // quantum cost by hand: AND plane 21 Feynman + 16 MUX, 8 Feynman minterm
    // copies, per output 8 switch MUX + 7 OR MUX; Feynman 1, MUX 4
    check(rpla_pkg::rpla_qc(3, 2) == 21 + 16 * 4 + 8 + 2 * (8 + 7) * 4, "quantum cost");
    prev = '0;
    prog = '0;
    x    = '0;
    for (int p = 0; p < 256; p++) begin
      prog[0] = 8'(p);
      prog[1] = 8'($urandom);
      for (int o = 0; o < M_OUT; o++)
        if (prog[o] != prev[o]) n_reprogram++;
      prev = prog;
      for (int v = 0; v < K; v++) begin
        x = 3'(v);
        #1;
        for (int o = 0; o < M_OUT; o++) begin
          check(f[o] == prog[o][v], $sformatf("output %0d for x=%0d", o, v));
          if (prog[o][v]) n_term_pass[v]++;
          else            n_term_block++;
          if (f[o]) n_out_high++;
          else      n_out_low++;
        end
        word[v] = {f, garbage};
      end
      for (int v = 0; v < K; v++)
        for (int w = v + 1; w < K; w++)
          check(word[v] != word[w], "output words distinct for one program");
    end
    mechanism(n_reprogram, "reprogram");
    for (int i = 0; i < K; i++) mechanism(n_term_pass[i], $sformatf("term_pass[%0d]", i));
    mechanism(n_term_block, "term_block");
    mechanism(n_out_high, "out_high");
    mechanism(n_out_low, "out_low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

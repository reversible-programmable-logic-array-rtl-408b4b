// mux_gate: the 3x3 reversible MUX gate (MG).
//
// Published equations: P = A, Q = A xor B xor C, R = A'C xor AB. R is a 2:1
// multiplexer with A as select (A = 1 picks B, A = 0 picks C). The gate is
// conservative: the number of ones at the output equals that at the input.
// With IN3 tied to 0, OUT3 = IN1 and IN2 (AND gate). With IN2 tied to 1,
// OUT3 = IN1 or IN3 (OR gate). The gate description also says the OR appears
// on Q, but Q = A xor 1 xor C is an XNOR; the OR-plane schematic takes the OR
// from OUT3, which is what the equations give, and this design follows that.
// Quantum cost 4.
//
// Interface: in1, in2, in3 -> out1, out2, out3. Purely combinational.
module mux_gate (
  input  logic in1,
  input  logic in2,
  input  logic in3,
  output logic out1,
  output logic out2,
  output logic out3
);

  assign out1 = in1;
  assign out2 = in1 ^ in2 ^ in3;
  assign out3 = (~in1 & in3) ^ (in1 & in2);

endmodule

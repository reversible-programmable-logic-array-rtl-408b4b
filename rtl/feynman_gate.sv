// feynman_gate: the 2x2 reversible Feynman (controlled-NOT) gate.
//
// OUT1 passes IN1 through and OUT2 is IN1 xor IN2, exactly the published gate
// equations P = A, Q = A xor B. The mapping is a bijection on two bits, so the
// inputs can always be recovered from the outputs. Tied to a constant on IN2
// it serves as a data copier (IN2 = 0: OUT2 = IN1) or as an inverter that
// keeps its input (IN2 = 1: OUT2 = not IN1). Quantum cost 1.
//
// Interface: in1, in2 -> out1, out2. Purely combinational, no clock.
module feynman_gate (
  input  logic in1,
  input  logic in2,
  output logic out1,
  output logic out2
);

  assign out1 = in1;
  assign out2 = in1 ^ in2;

endmodule

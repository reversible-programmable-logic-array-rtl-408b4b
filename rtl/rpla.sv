// rpla: reversible programmable logic array with N_IN inputs and M_OUT
// outputs, built only from Feynman and MUX gates.
//
// The array computes, for every output o, f[o] = OR over all minterms i of
// (prog[o][i] and minterm_i(x)). The program word prog[o] is therefore the
// truth table of output o: bit i is the value of f[o] for input word x = i
// (x[N_IN-1] most significant). With N_IN = 3 each output can realise any of
// the 2^8 Boolean functions of three variables, which is the published
// capacity of the three-input RPLA.
//
// Datapath, input to output:
//   1. rev_and_plane decodes x into all K = 2^N_IN minterms (Feynman gates for
//      inversion and copying, MUX gates as AND).
//   2. Each minterm is copied M_OUT times with a Feynman copy chain
//      (fy_fanout), because reversible logic forbids fan-out.
//   3. Per output and minterm, a MUX gate acts as programmable switch: IN1 is
//      the program bit, IN2 the minterm copy, IN3 = 0, so OUT3 = prog and
//      minterm (the MUX gate's R output selects IN2 when IN1 = 1, else 0).
//   4. Per output, rev_or_plane ORs the K switched terms with a chain of
//      MUX gates whose IN2 is tied to 1.
// All OUT1/OUT2 outputs of the MUX gates that are not used are collected on
// the garbage port: first the AND plane's, then for each output o (o = 0
// first) its K switch gates (two bits each) followed by its OR chain.
// Some garbage bits are plain copies of an input (the OUT1 = IN1 output of a
// switch gate repeats its program bit); they are kept because a reversible
// circuit must output as many bits as it takes in.
//
// What follows the published design: the two planes, the gate types used in
// each, the three-input size, the minterm numbering and the OR chain. This
// design's own choices: decoding full minterms (the published AND-plane
// simulation shows all eight minterms O0..O7), programming the OR plane with
// one MUX-gate switch per crosspoint driven from the prog input (the published
// text does not say how the array is programmed), and M_OUT = 2, which is
// enough for a full adder or full subtractor.
//
// Interface: x[N_IN-1:0], prog[M_OUT-1:0][K-1:0] -> f[M_OUT-1:0],
// garbage[rpla_garbage(N_IN, M_OUT)-1:0]. Purely combinational: outputs follow
// x and prog after the gate delays; there is no clock, reset or handshake.
// prog is meant to be held static, like the fuses of a conventional PLA, but
// may change at any time.
module rpla
  import rpla_pkg::*;
#(
  parameter int unsigned N_IN  = 3,
  parameter int unsigned M_OUT = 2,
  localparam int unsigned K       = 1 << N_IN,
  localparam int unsigned NG_AND  = and_plane_garbage(N_IN),
  localparam int unsigned NG_OR   = or_plane_garbage(K),
  localparam int unsigned NG_OUT  = 2 * K + NG_OR,   // garbage per output
  localparam int unsigned NGARB   = rpla_garbage(N_IN, M_OUT)
) (
  input  logic [N_IN-1:0]           x,
  input  logic [M_OUT-1:0][K-1:0]   prog,
  output logic [M_OUT-1:0]          f,
  output logic [NGARB-1:0]          garbage
);

  // ---- AND plane ----------------------------------------------------------
  logic [K-1:0] minterm;

  rev_and_plane #(.N_IN(N_IN)) u_and_plane (
    .x      (x),
    .minterm(minterm),
    .garbage(garbage[NG_AND-1:0])
  );

  // ---- minterm copies, one per output ------------------------------------
  logic [K-1:0][M_OUT-1:0] mcopy;

  for (genvar i = 0; i < K; i++) begin : g_term_copy
    fy_fanout #(.COPIES(M_OUT)) u_copy (.a(minterm[i]), .y(mcopy[i]));
  end

  // ---- programmable OR plane, one per output -----------------------------
  for (genvar o = 0; o < M_OUT; o++) begin : g_out
    localparam int unsigned GB = NG_AND + o * NG_OUT;  // this output's garbage
    logic [K-1:0] sel;  // minterms switched by the program bits

    for (genvar i = 0; i < K; i++) begin : g_switch
      mux_gate u_switch (
        .in1 (prog[o][i]),
        .in2 (mcopy[i][o]),
        .in3 (1'b0),
        .out1(garbage[GB+2*i]),
        .out2(garbage[GB+2*i+1]),
        .out3(sel[i])
      );
    end

    rev_or_plane #(.N_TERMS(K)) u_or_plane (
      .term   (sel),
      .o      (f[o]),
      .garbage(garbage[GB+2*K +: NG_OR])
    );
  end

endmodule

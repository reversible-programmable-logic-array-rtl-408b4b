// rev_and_plane: reversible AND plane that decodes N_IN inputs into all
// K = 2^N_IN minterms.
//
// Output minterm[i] is 1 exactly when the input word x equals i, with x[N_IN-1]
// the most significant bit. For the three-input plane x = {A, B, C}, so
// A=1, B=0, C=0 raises minterm[4] (O4), which is the published simulation
// result of the AND plane.
//
// How it works. Every literal is used by K/2 minterms, and reversible logic
// allows no fan-out, so for each input bit one Feynman gate used as inverter
// (IN2 = 1) produces x and x' while keeping x, and two Feynman copy chains
// (fy_fanout) turn each into K/2 copies. Each minterm then takes its own copy
// of one literal per input and ANDs them with a chain of N_IN-1 MUX gates
// whose IN3 is tied to 0 (OUT3 = IN1 and IN2). The chain starts with the most
// significant input. OUT1 and OUT2 of every MUX gate are garbage outputs and
// leave on the garbage port, gate by gate, minterm by minterm.
//
// The published material gives the gate types (Feynman and MUX), the
// input and output names and the minterm numbering; the gate-level netlist of
// the published schematic is not legible, so the copy chains and the order of
// the AND chain are this design's own, smallest arrangement.
//
// Interface: x[N_IN-1:0] -> minterm[K-1:0] (one-hot), garbage[...].
// Purely combinational, no clock or reset.
module rev_and_plane
  import rpla_pkg::*;
#(
  parameter int unsigned N_IN = 3,
  localparam int unsigned K      = 1 << N_IN,
  localparam int unsigned NGARB  = and_plane_garbage(N_IN)
) (
  input  logic [N_IN-1:0]  x,
  output logic [K-1:0]     minterm,
  output logic [NGARB-1:0] garbage
);

  localparam int unsigned HALF = K / 2;  // copies needed of each literal

  if (N_IN < 2) begin : g_bad_size
    $error("rev_and_plane needs N_IN >= 2");
  end

  // ---- literal generation: NOT gate, then two copy chains per input --------
  logic [N_IN-1:0][HALF-1:0] lit_t;  // copies of x[j]
  logic [N_IN-1:0][HALF-1:0] lit_c;  // copies of x[j]'

  for (genvar j = 0; j < N_IN; j++) begin : g_input
    logic x_keep, x_inv;
    feynman_gate u_not (
      .in1 (x[j]),
      .in2 (1'b1),
      .out1(x_keep),
      .out2(x_inv)
    );
    fy_fanout #(.COPIES(HALF)) u_copy_t (.a(x_keep), .y(lit_t[j]));
    fy_fanout #(.COPIES(HALF)) u_copy_c (.a(x_inv),  .y(lit_c[j]));
  end

  // ---- minterms: a chain of MUX-as-AND gates per minterm -------------------
  for (genvar i = 0; i < K; i++) begin : g_minterm
    logic [N_IN-1:0] lit;       // the literal of input j used by this minterm
    logic [N_IN-1:0] prod;      // prod[g]: product entering gate g
    for (genvar j = 0; j < N_IN; j++) begin : g_lit
      // Index of this minterm among those with the same polarity of x[j]:
      // the minterm number with bit j removed.
      localparam int unsigned IDX = ((i >> (j + 1)) << j) | (i & ((1 << j) - 1));
      if (((i >> j) & 1) == 1) begin : g_true
        assign lit[j] = lit_t[j][IDX];
      end else begin : g_comp
        assign lit[j] = lit_c[j][IDX];
      end
    end
    assign prod[0] = lit[N_IN-1];
    for (genvar g = 0; g < N_IN - 1; g++) begin : g_and
      localparam int unsigned GB = 2 * (i * (N_IN - 1) + g);
      mux_gate u_and (
        .in1 (prod[g]),
        .in2 (lit[N_IN-2-g]),
        .in3 (1'b0),
        .out1(garbage[GB]),
        .out2(garbage[GB+1]),
        .out3(prod[g+1])
      );
    end
    assign minterm[i] = prod[N_IN-1];
  end

  // Exactly one minterm is true for every input word.
  always_comb begin
    assert ($onehot(minterm) || $isunknown(x))
      else $error("rev_and_plane: minterms not one-hot for x=%b", x);
  end

endmodule

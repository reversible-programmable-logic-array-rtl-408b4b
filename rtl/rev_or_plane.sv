// rev_or_plane: reversible OR of N_TERMS terms built from MUX gates.
//
// This follows the published OR-plane schematic: a chain of MUX gates, each
// with IN2 tied to 1, so that OUT3 = IN1' IN3 xor IN1 = IN1 or IN3. The first
// gate takes term[0] on IN1 and term[1] on IN3; every further gate takes the
// running OR from the previous OUT3 on IN1 and the next term on IN3. The last
// OUT3 is the output o. With three terms A, B, C this is exactly the
// published two-gate circuit O = A + B + C. OUT1 and OUT2 of every gate are
// garbage outputs, two per gate, gate 0 first.
//
// Interface: term[N_TERMS-1:0] -> o, garbage[2*(N_TERMS-1)-1:0].
// Purely combinational, no clock or reset.
module rev_or_plane
  import rpla_pkg::*;
#(
  parameter int unsigned N_TERMS = 3,
  localparam int unsigned NGARB = or_plane_garbage(N_TERMS)
) (
  input  logic [N_TERMS-1:0] term,
  output logic               o,
  output logic [NGARB-1:0]   garbage
);

  if (N_TERMS < 2) begin : g_bad_size
    $error("rev_or_plane needs N_TERMS >= 2");
  end

  logic [N_TERMS-1:0] acc;  // acc[g]: running OR entering gate g
  assign acc[0] = term[0];

  for (genvar g = 0; g < N_TERMS - 1; g++) begin : g_or
    mux_gate u_or (
      .in1 (acc[g]),
      .in2 (1'b1),
      .in3 (term[g+1]),
      .out1(garbage[2*g]),
      .out2(garbage[2*g+1]),
      .out3(acc[g+1])
    );
  end

  assign o = acc[N_TERMS-1];

endmodule

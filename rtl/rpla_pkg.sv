// rpla_pkg: shared constants and cost formulas of the reversible PLA.
//
// Quantum cost (QC) of the two reversible primitives: 1 for the 2x2 Feynman
// (CNOT) gate and 4 for the 3x3 MUX gate, as the gate literature gives them.
// The functions below return, for a given size, how many gates, constant
// inputs and garbage outputs each plane is built from. The RTL uses the
// garbage counts to size its garbage ports; the testbenches recompute the
// same quantities by walking the netlist's structure.
//
// Structure the formulas describe (this design's choice where the published
// schematic is too coarse to read gate by gate):
//   AND plane, n inputs, K = 2^n minterms:
//     per input one Feynman NOT gate (x,1)->(x,x') and two Feynman copy chains
//     of K/2-1 gates each, giving K/2 copies of x and of x';
//     per minterm n-1 MUX gates used as AND (IN3 = 0).
//   Programmable OR plane per output: K MUX gates used as programmable
//     switches (IN1 = program bit, IN3 = 0), then K-1 MUX gates used as OR
//     (IN2 = 1). With m > 1 outputs every minterm is first copied m times by
//     a Feynman chain of m-1 gates.
package rpla_pkg;

  localparam int unsigned QC_FEYNMAN = 1;
  localparam int unsigned QC_MUX     = 4;

  // ---- AND plane -----------------------------------------------------------
  function automatic int unsigned and_plane_feynman(int unsigned n);
    return n * (1 + 2 * ((1 << (n - 1)) - 1));
  endfunction

  function automatic int unsigned and_plane_mux(int unsigned n);
    return (n - 1) * (1 << n);
  endfunction

  // two garbage outputs (OUT1, OUT2) per MUX-as-AND gate; Feynman outputs are
  // all used as literals
  function automatic int unsigned and_plane_garbage(int unsigned n);
    return 2 * and_plane_mux(n);
  endfunction

  // one constant per gate: IN2 of each Feynman gate, IN3 of each MUX gate
  function automatic int unsigned and_plane_constants(int unsigned n);
    return and_plane_feynman(n) + and_plane_mux(n);
  endfunction

  function automatic int unsigned and_plane_qc(int unsigned n);
    return QC_FEYNMAN * and_plane_feynman(n) + QC_MUX * and_plane_mux(n);
  endfunction

  // ---- OR plane (k terms, chain of k-1 MUX gates) --------------------------
  function automatic int unsigned or_plane_garbage(int unsigned k);
    return 2 * (k - 1);
  endfunction

  function automatic int unsigned or_plane_qc(int unsigned k);
    return QC_MUX * (k - 1);
  endfunction

  // ---- whole RPLA ----------------------------------------------------------
  // garbage: AND plane, then per output K programmable switches (OUT1, OUT2
  // each) and the OR chain
  function automatic int unsigned rpla_garbage(int unsigned n, int unsigned m);
    return and_plane_garbage(n) + m * (2 * (1 << n) + or_plane_garbage(1 << n));
  endfunction

  function automatic int unsigned rpla_qc(int unsigned n, int unsigned m);
    return and_plane_qc(n)
         + QC_FEYNMAN * (1 << n) * (m - 1)
         + m * (QC_MUX * (1 << n) + or_plane_qc(1 << n));
  endfunction

endpackage

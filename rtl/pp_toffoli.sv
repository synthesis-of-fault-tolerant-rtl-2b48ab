// pp_toffoli: parity preserving realisation of the 3x3 Toffoli gate.
//
// A Toffoli gate (P=A, Q=B, R=AB^C) is not parity preserving by itself.
// This circuit builds the same three outputs from two parity preserving
// gates and one extra line:
//   1. A Fredkin gate with inputs (A, B, 0) gives A, A'B and AB.
//   2. A Feynman double gate with inputs (AB, A'B, C) gives
//      AB (garbage), AB ^ A'B = B, and AB ^ C.
// Primary outputs: P = A (from the Fredkin gate), Q = B, R = AB ^ C.
// One constant input (0) and one garbage output (AB).
//
// The gate choice and the wiring follow the proposed circuit; the order in
// which the Fredkin outputs A'B and AB enter the Feynman double gate is
// fixed by the outputs it must produce (Q = B needs A'B on its second input).
//
// Interface: a, b, c in; p, q, r and garbage out. const_in is the constant
// line of the Fredkin gate, tied to 0 in normal use; it is a port so that
// the parity of every input line, constants included, can be checked.
// Timing: combinational, two gate levels.
module pp_toffoli (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic const_in,
  output logic p,
  output logic q,
  output logic r,
  output logic garbage
);
  logic w_anb;  // A'B from the Fredkin gate
  logic w_ab;   // AB from the Fredkin gate

  frg_gate u_frg (
    .a(a), .b(b), .c(const_in),
    .p(p), .q(w_anb), .r(w_ab)
  );

  f2g_gate u_f2g (
    .a(w_ab), .b(w_anb), .c(c),
    .p(garbage), .q(q), .r(r)
  );
endmodule

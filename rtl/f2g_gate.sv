// f2g_gate: the 3x3 Feynman double gate.
//
// P = A, Q = A ^ B, R = A ^ C. A is copied through and XORed into both
// other lines; since it is added twice, P^Q^R = A^B^C and the gate is
// parity preserving as well as reversible (it is its own inverse). It is a
// known gate taken from the literature; it is used here as the second
// gate of the parity preserving Toffoli circuit.
//
// Interface: single-bit inputs a, b, c; outputs p, q, r.
// Timing: combinational, one gate level.
module f2g_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  always_comb begin
    p = a;
    q = a ^ b;
    r = a ^ c;
  end
endmodule

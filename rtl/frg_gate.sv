// frg_gate: the 3x3 Fredkin gate (controlled swap).
//
// P = A, Q = A'B ^ AC, R = A'C ^ AB: when the control A is 1 the two data
// lines B and C are exchanged, otherwise they pass straight through. The
// gate only moves ones around, so it is both reversible and parity
// preserving. It is a known gate taken from the literature; it is used
// here as the first gate of the parity preserving Toffoli circuit.
//
// Interface: single-bit inputs a (control), b, c; outputs p, q, r.
// Timing: combinational, one gate level.
module frg_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  always_comb begin
    p = a;
    q = (~a & b) ^ (a & c);
    r = (~a & c) ^ (a & b);
  end
endmodule

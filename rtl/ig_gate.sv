// ig_gate: the 4x4 parity preserving reversible IG gate.
//
// The gate maps (A,B,C,D) to
//   P = A
//   Q = A ^ B
//   R = (A & B) ^ C
//   S = (B & D) ^ (~B & (A ^ D))
// The mapping is a permutation of the 16 input patterns (reversible) and
// P^Q^R^S always equals A^B^C^D (parity preserving), so a single flipped
// line anywhere in a network of these gates changes the parity of the
// network's outputs. A passes straight through ("one-through" gate).
//
// Interface: four single-bit inputs a..d, four single-bit outputs p..s.
// Timing: purely combinational, one gate level (one "unit delay").
//
// The equations are those drawn next to the gate symbol. The truth table
// printed alongside that drawing disagrees in the two rows A=1,B=0,C=0
// (D=0 and D=1), where it lists the same output 1001 twice; that row pair
// would be neither reversible nor parity preserving, so the equations are
// followed here.
module ig_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);
  always_comb begin
    p = a;
    q = a ^ b;
    r = (a & b) ^ c;
    s = (b & d) ^ (~b & (a ^ d));
  end
endmodule

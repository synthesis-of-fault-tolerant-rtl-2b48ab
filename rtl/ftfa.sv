// ftfa: fault tolerant reversible full adder built from two IG gates.
//
// First IG, inputs (A, B, 0, 0):
//   P = A, Q = A^B, R = AB, S = AB'   (S is garbage G1)
// Second IG, inputs (A^B, Cin, AB, A):
//   P = A^B                           (garbage G2)
//   Q = A^B^Cin                       = Sum
//   R = (A^B)Cin ^ AB                 = Cout
//   S = Cin A ^ Cin'B                 (garbage G3)
// Two constant inputs and three garbage outputs, the minimum a parity
// preserving full adder can have. Because both gates preserve parity and
// no line fans out, A^B^Cin^C1^C2 always equals Sum^Cout^G1^G2^G3, and a
// fault on any one line of the adder flips that equality.
//
// The two gates, their first three connections and the constant inputs
// follow the proposed circuit. The fourth input of the second IG is the
// only output of the first IG still free (its P = A), which is what the
// drawing shows looping over. Sum and Cout do not depend on it.
//
// Interface: a, b, cin; const_in[1:0] are the C and D inputs of the first
// IG (0 in normal use); sum, cout; garbage[0]=G1, [1]=G2, [2]=G3.
// Timing: combinational, two IG levels (two unit delays).
module ftfa (
  input  logic       a,
  input  logic       b,
  input  logic       cin,
  input  logic [1:0] const_in,
  output logic       sum,
  output logic       cout,
  output logic [2:0] garbage
);
  logic w_a;    // A passed through the first IG
  logic w_axb;  // A ^ B
  logic w_ab;   // A & B

  ig_gate u_ig1 (
    .a(a), .b(b), .c(const_in[0]), .d(const_in[1]),
    .p(w_a), .q(w_axb), .r(w_ab), .s(garbage[0])
  );

  ig_gate u_ig2 (
    .a(w_axb), .b(cin), .c(w_ab), .d(w_a),
    .p(garbage[1]), .q(sum), .r(cout), .s(garbage[2])
  );
endmodule

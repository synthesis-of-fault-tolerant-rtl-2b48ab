// tb_ig_gate: exhaustive self-checking test of the IG gate.
//
// Applies all 16 input patterns and compares P,Q,R,S with a table worked
// out by hand from the gate equations (P=A, Q=A^B, R=AB^C,
// S=BD^B'(A^D)). It also checks the two properties the gate is built for:
// every output pattern occurs exactly once (reversible) and the output
// parity equals the input parity. Finally it checks two of the gate's
// uses as a universal gate: with A=1 it gives Q=B' and R=B^C (inverter
// and XOR); with C=0 it gives Q=A^B and R=AB (XOR and AND).
module tb_ig_gate;
  logic a, b, c, d, p, q, r, s;
  int checks = 0, failures = 0;

  // Expected {P,Q,R,S} for input {A,B,C,D} = index.
  localparam logic [3:0] EXPECTED [16] = '{
    4'h0, 4'h1, 4'h2, 4'h3, 4'h4, 4'h5, 4'h6, 4'h7,
    4'hD, 4'hC, 4'hF, 4'hE, 4'hA, 4'hB, 4'h8, 4'h9
  };

  ig_gate dut (.a(a), .b(b), .c(c), .d(d), .p(p), .q(q), .r(r), .s(s));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (in=%b%b%b%b out=%b%b%b%b)", what, a, b, c, d, p, q, r, s);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [15:0] seen = '0;
    for (int v = 0; v < 16; v++) begin
      {a, b, c, d} = 4'(v);
      #1;
      check({p, q, r, s} == EXPECTED[v], "truth table");
      check((a ^ b ^ c ^ d) == (p ^ q ^ r ^ s), "parity preserved");
      check(!seen[{p, q, r, s}], "output pattern unique");
      seen[{p, q, r, s}] = 1'b1;
    end
    check(seen == 16'hFFFF, "all 16 output patterns reached");

    // Universal-gate uses.
    for (int v = 0; v < 8; v++) begin
      a = 1'b1; {b, c, d} = 3'(v);
      #1;
      check(q == ~b, "A=1: Q is NOT B");
      check(r == (b ^ c), "A=1: R is B xor C");
      {a, b, d} = 3'(v); c = 1'b0;
      #1;
      check(q == (a ^ b), "C=0: Q is A xor B");
      check(r == (a & b), "C=0: R is A and B");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

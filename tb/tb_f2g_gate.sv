// tb_f2g_gate: exhaustive self-checking test of the Feynman double gate.
//
// Compares all 8 input patterns with the gate's truth table (A is XORed
// into both B and C), and checks that the gate is reversible and parity
// preserving.
module tb_f2g_gate;
  logic a, b, c, p, q, r;
  int checks = 0, failures = 0;

  // Expected {P,Q,R} for input {A,B,C} = index.
  localparam logic [2:0] EXPECTED [8] = '{3'd0, 3'd1, 3'd2, 3'd3, 3'd7, 3'd6, 3'd5, 3'd4};

  f2g_gate dut (.a(a), .b(b), .c(c), .p(p), .q(q), .r(r));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (in=%b%b%b out=%b%b%b)", what, a, b, c, p, q, r);
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
    bit [7:0] seen = '0;
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      check({p, q, r} == EXPECTED[v], "truth table");
      check((a ^ b ^ c) == (p ^ q ^ r), "parity preserved");
      check(!seen[{p, q, r}], "output pattern unique");
      seen[{p, q, r}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

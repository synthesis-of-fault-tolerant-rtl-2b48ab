// tb_pp_toffoli: exhaustive self-checking test of the parity preserving
// Toffoli circuit.
//
// With the constant line at 0, all 8 (A,B,C) patterns must give P=A, Q=B,
// R=AB^C (the Toffoli function) and garbage AB. Over all 16 patterns of
// (A,B,C,constant) the circuit must be reversible (16 distinct outputs)
// and keep input parity equal to output parity.
module tb_pp_toffoli;
  logic a, b, c, k, p, q, r, g;
  int checks = 0, failures = 0;

  pp_toffoli dut (.a(a), .b(b), .c(c), .const_in(k), .p(p), .q(q), .r(r), .garbage(g));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (in=%b%b%b k=%b out=%b%b%b g=%b)", what, a, b, c, k, p, q, r, g);
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
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v); k = 1'b0;
      #1;
      check(p == a, "P = A");
      check(q == b, "Q = B");
      check(r == ((a & b) ^ c), "R = AB xor C");
      check(g == (a & b), "garbage = AB");
    end
    for (int v = 0; v < 16; v++) begin
      {a, b, c, k} = 4'(v);
      #1;
      check((a ^ b ^ c ^ k) == (p ^ q ^ r ^ g), "parity preserved");
      check(!seen[{p, q, r, g}], "output pattern unique");
      seen[{p, q, r, g}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

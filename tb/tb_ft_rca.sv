// tb_ft_rca: self-checking test of the N-bit fault tolerant ripple carry
// adder.
//
// Two instances: the default 4-bit adder is tested exhaustively (all 512
// combinations of A, B and Cin); an 8-bit adder gets 2000 random
// operands plus the full-length carry ripple 0xFF+0x00+1. Both must give
// {cout,sum} = A+B+Cin with constants at 0, keep input parity equal to
// output parity for random constant inputs, and report the cost figures
// of the structure: 2N gates, 3N garbage outputs, 2N constant inputs and
// 2N unit delays.
module tb_ft_rca;
  localparam int unsigned N0 = 4;
  localparam int unsigned N1 = 8;

  logic [N0-1:0] a0, b0, s0;
  logic [2*N0-1:0] k0;
  logic [3*N0-1:0] g0;
  logic cin0, cout0;

  logic [N1-1:0] a1, b1, s1;
  logic [2*N1-1:0] k1;
  logic [3*N1-1:0] g1;
  logic cin1, cout1;

  int checks = 0, failures = 0;

  ft_rca dut0 (.a(a0), .b(b0), .cin(cin0), .const_in(k0), .sum(s0), .cout(cout0), .garbage(g0));
  ft_rca #(.N(N1)) dut1 (.a(a1), .b(b1), .cin(cin1), .const_in(k1), .sum(s1), .cout(cout1), .garbage(g1));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Cost figures.
    check(dut0.GATE_COUNT == 2 * N0 && dut1.GATE_COUNT == 2 * N1, "gate count 2N");
    check(dut0.GARBAGE_COUNT == 3 * N0 && dut1.GARBAGE_COUNT == 3 * N1, "garbage count 3N");
    check(dut0.CONST_COUNT == 2 * N0 && dut1.CONST_COUNT == 2 * N1, "constant count 2N");
    check(dut0.UNIT_DELAY == 2 * N0 && dut1.UNIT_DELAY == 2 * N1, "unit delay 2N");
    check($bits(g0) == 3 * N0 && $bits(k0) == 2 * N0, "port widths 3N / 2N");

    // 4-bit, exhaustive.
    for (int v = 0; v < (1 << (2 * N0 + 1)); v++) begin
      int exp_total;
      {a0, b0, cin0} = (2*N0+1)'(v);
      k0 = '0;
      #1;
      exp_total = int'(a0) + int'(b0) + int'(cin0);
      if ({cout0, s0} != (N0+1)'(exp_total)) begin
        $display("  4-bit: %0d + %0d + %0d gave %0d", a0, b0, cin0, {cout0, s0});
      end
      check({cout0, s0} == (N0+1)'(exp_total), "4-bit sum");
      k0 = (2*N0)'($urandom);
      #1;
      check((^{a0, b0, cin0, k0}) == (^{s0, cout0, g0}), "4-bit parity preserved");
    end

    // 8-bit, full-length carry ripple then random.
    a1 = '1; b1 = '0; cin1 = 1'b1; k1 = '0;
    #1;
    check(s1 == '0 && cout1 == 1'b1, "8-bit carry ripples through all stages");
    for (int i = 0; i < 2000; i++) begin
      logic [N1:0] exp_sum;
      a1 = N1'($urandom); b1 = N1'($urandom); cin1 = 1'($urandom); k1 = '0;
      #1;
      exp_sum = {1'b0, a1} + {1'b0, b1} + {{N1{1'b0}}, cin1};
      check({cout1, s1} == exp_sum, "8-bit sum");
      k1 = (2*N1)'($urandom);
      #1;
      check((^{a1, b1, cin1, k1}) == (^{s1, cout1, g1}), "8-bit parity preserved");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ftfa: exhaustive self-checking test of the fault tolerant full adder.
//
// With both constant inputs at 0, every (A,B,Cin) must give the binary
// sum A+B+Cin on {Cout,Sum} and the garbage G1=AB', G2=A^B,
// G3=(Cin ? A : B) worked out from the two-gate wiring. Over all 32
// patterns of (A,B,Cin,C1,C2) the adder must be reversible and parity
// preserving. The two input rows of the paper's repeated-output example
// whose garbage values agree with this wiring, (0,0,1) -> 000 and
// (0,1,0) -> 011, are checked literally.
module tb_ftfa;
  logic a, b, cin, sum, cout;
  logic [1:0] k;
  logic [2:0] g;
  int checks = 0, failures = 0;

  ftfa dut (.a(a), .b(b), .cin(cin), .const_in(k), .sum(sum), .cout(cout), .garbage(g));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (a=%b b=%b cin=%b k=%b -> s=%b co=%b g=%b)",
               what, a, b, cin, k, sum, cout, g);
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
    bit [31:0] seen = '0;
    for (int v = 0; v < 8; v++) begin
      int total;
      {a, b, cin} = 3'(v); k = 2'b00;
      #1;
      total = int'(a) + int'(b) + int'(cin);
      check({cout, sum} == 2'(total), "Cout,Sum = A+B+Cin");
      check(g[0] == (a & ~b), "G1 = AB'");
      check(g[1] == (a ^ b), "G2 = A xor B");
      check(g[2] == (cin ? a : b), "G3 = Cin ? A : B");
    end
    {a, b, cin, k} = 5'b00100; #1;
    check({sum, cout, g} == 5'b10000, "row A=0 B=0 Cin=1: S=1 Cout=0 G=000");
    {a, b, cin, k} = 5'b01000; #1;
    check({sum, cout, g} == 5'b10110, "row A=0 B=1 Cin=0: S=1 Cout=0 G1G2G3=011");

    for (int v = 0; v < 32; v++) begin
      {a, b, cin, k} = 5'(v);
      #1;
      check((a ^ b ^ cin ^ k[0] ^ k[1]) == (sum ^ cout ^ g[0] ^ g[1] ^ g[2]), "parity preserved");
      check(!seen[{sum, cout, g}], "output pattern unique");
      seen[{sum, cout, g}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

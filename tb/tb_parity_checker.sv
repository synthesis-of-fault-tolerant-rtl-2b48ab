// tb_parity_checker: self-checking test of the parity mismatch detector.
//
// Drives random input and output vectors into a 17/17-bit checker and
// compares fault with a bit-by-bit count of ones on both sides, then
// checks that flipping any single bit of a matching pair raises fault.
module tb_parity_checker;
  localparam int unsigned W = 17;
  logic [W-1:0] iv, ov;
  logic fault;
  int checks = 0, failures = 0;

  parity_checker #(.IN_W(W), .OUT_W(W)) dut (.in_vec(iv), .out_vec(ov), .fault(fault));

  function automatic int ones(input logic [W-1:0] v);
    int n = 0;
    for (int i = 0; i < W; i++) n += int'(v[i]);
    return n;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (in=%h out=%h fault=%b)", what, iv, ov, fault);
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
    for (int i = 0; i < 500; i++) begin
      iv = W'($urandom); ov = W'($urandom);
      #1;
      check(fault == (((ones(iv) + ones(ov)) % 2) == 1), "fault = parity mismatch");
    end
    iv = W'($urandom); ov = iv;
    #1;
    check(fault == 1'b0, "equal vectors: no fault");
    for (int j = 0; j < W; j++) begin
      ov = iv; ov[j] = ~ov[j];
      #1;
      check(fault == 1'b1, "single flipped output bit detected");
      ov = iv; iv[j] = ~iv[j];
      #1;
      check(fault == 1'b1, "single flipped input bit detected");
      iv[j] = ~iv[j];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

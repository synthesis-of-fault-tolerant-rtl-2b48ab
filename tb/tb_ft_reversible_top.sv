// tb_ft_reversible_top: end-to-end test of the two fault tolerant units.
//
// Runs the top at its default parameters (4-bit adder), so it is also the
// full-size test. It checks, in this order:
//   * fault-free adder: all 512 (A,B,Cin) give {cout,sum} = A+B+Cin and
//     rca_fault stays 0; full-length carry ripple and carry-out overflow
//     are counted;
//   * fault-free Toffoli: all 8 inputs give (A, B, AB^C) with garbage AB
//     and tg_fault stays 0; the inverting case A=B=1 is counted;
//   * single stuck-at faults: each internal line of the adder (the three
//     lines from the first to the second IG of every stage and every
//     carry) and of the Toffoli circuit (the two lines between its gates)
//     is forced to 0 and to 1 under every input pattern. Whenever the
//     forced value differs from the fault-free value the unit's fault
//     flag must rise; otherwise the unit must still give correct results
//     with the flag low. Detected faults that corrupted sum/carry or the
//     Toffoli output are counted separately.
// Each mechanism must occur at least once, or a failure is counted.
module tb_ft_reversible_top;
  localparam int unsigned N = 4;
  localparam int unsigned RCA_SITES = 16;
  localparam int unsigned TG_SITES  = 2;

  logic [N-1:0] a, b, sum;
  logic cin, cout, rca_fault;
  logic [3*N-1:0] rca_garbage;
  logic tg_a, tg_b, tg_c, tg_p, tg_q, tg_r, tg_garbage, tg_fault;

  int checks = 0, failures = 0;
  int n_ripple = 0, n_overflow = 0, n_tg_invert = 0;
  int n_rca_detect = 0, n_rca_detect_corrupt = 0, n_rca_masked = 0;
  int n_tg_detect = 0, n_tg_detect_corrupt = 0;

  ft_reversible_top dut (
    .a(a), .b(b), .cin(cin), .sum(sum), .cout(cout),
    .rca_garbage(rca_garbage), .rca_fault(rca_fault),
    .tg_a(tg_a), .tg_b(tg_b), .tg_c(tg_c),
    .tg_p(tg_p), .tg_q(tg_q), .tg_r(tg_r),
    .tg_garbage(tg_garbage), .tg_fault(tg_fault)
  );

  logic good;
  logic val;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s (a=%h b=%h cin=%b tg=%b%b%b)", what, a, b, cin, tg_a, tg_b, tg_c);
    end
  endtask

  task automatic rca_force(input int site);
    case (site)
      0: begin good = dut.u_rca.g_stage[0].u_fa.w_a; force dut.u_rca.g_stage[0].u_fa.w_a = val; end
      1: begin good = dut.u_rca.g_stage[0].u_fa.w_axb; force dut.u_rca.g_stage[0].u_fa.w_axb = val; end
      2: begin good = dut.u_rca.g_stage[0].u_fa.w_ab; force dut.u_rca.g_stage[0].u_fa.w_ab = val; end
      3: begin good = dut.u_rca.carry[1]; force dut.u_rca.carry[1] = val; end
      4: begin good = dut.u_rca.g_stage[1].u_fa.w_a; force dut.u_rca.g_stage[1].u_fa.w_a = val; end
      5: begin good = dut.u_rca.g_stage[1].u_fa.w_axb; force dut.u_rca.g_stage[1].u_fa.w_axb = val; end
      6: begin good = dut.u_rca.g_stage[1].u_fa.w_ab; force dut.u_rca.g_stage[1].u_fa.w_ab = val; end
      7: begin good = dut.u_rca.carry[2]; force dut.u_rca.carry[2] = val; end
      8: begin good = dut.u_rca.g_stage[2].u_fa.w_a; force dut.u_rca.g_stage[2].u_fa.w_a = val; end
      9: begin good = dut.u_rca.g_stage[2].u_fa.w_axb; force dut.u_rca.g_stage[2].u_fa.w_axb = val; end
      10: begin good = dut.u_rca.g_stage[2].u_fa.w_ab; force dut.u_rca.g_stage[2].u_fa.w_ab = val; end
      11: begin good = dut.u_rca.carry[3]; force dut.u_rca.carry[3] = val; end
      12: begin good = dut.u_rca.g_stage[3].u_fa.w_a; force dut.u_rca.g_stage[3].u_fa.w_a = val; end
      13: begin good = dut.u_rca.g_stage[3].u_fa.w_axb; force dut.u_rca.g_stage[3].u_fa.w_axb = val; end
      14: begin good = dut.u_rca.g_stage[3].u_fa.w_ab; force dut.u_rca.g_stage[3].u_fa.w_ab = val; end
      15: begin good = dut.u_rca.carry[4]; force dut.u_rca.carry[4] = val; end
      default: ;
    endcase
  endtask

  task automatic rca_release(input int site);
    case (site)
      0: release dut.u_rca.g_stage[0].u_fa.w_a;
      1: release dut.u_rca.g_stage[0].u_fa.w_axb;
      2: release dut.u_rca.g_stage[0].u_fa.w_ab;
      3: release dut.u_rca.carry[1];
      4: release dut.u_rca.g_stage[1].u_fa.w_a;
      5: release dut.u_rca.g_stage[1].u_fa.w_axb;
      6: release dut.u_rca.g_stage[1].u_fa.w_ab;
      7: release dut.u_rca.carry[2];
      8: release dut.u_rca.g_stage[2].u_fa.w_a;
      9: release dut.u_rca.g_stage[2].u_fa.w_axb;
      10: release dut.u_rca.g_stage[2].u_fa.w_ab;
      11: release dut.u_rca.carry[3];
      12: release dut.u_rca.g_stage[3].u_fa.w_a;
      13: release dut.u_rca.g_stage[3].u_fa.w_axb;
      14: release dut.u_rca.g_stage[3].u_fa.w_ab;
      15: release dut.u_rca.carry[4];
      default: ;
    endcase
  endtask

  task automatic tg_force(input int site);
    case (site)
      0: begin good = dut.u_tg.w_anb; force dut.u_tg.w_anb = val; end
      1: begin good = dut.u_tg.w_ab; force dut.u_tg.w_ab = val; end
      default: ;
    endcase
  endtask

  task automatic tg_release(input int site);
    case (site)
      0: release dut.u_tg.w_anb;
      1: release dut.u_tg.w_ab;
      default: ;
    endcase
  endtask

  function automatic logic [N:0] rca_expect();
    return {1'b0, a} + {1'b0, b} + {{N{1'b0}}, cin};
  endfunction

  initial begin : watchdog
    #10000000;
    failures++;
    $display("FAIL: watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tg_a = 0; tg_b = 0; tg_c = 0; a = '0; b = '0; cin = 0; val = 0;

    // Fault-free adder.
    for (int v = 0; v < (1 << (2*N+1)); v++) begin
      {a, b, cin} = (2*N+1)'(v);
      #1;
      check({cout, sum} == rca_expect(), "adder sum");
      check(rca_fault == 1'b0, "no false alarm on the adder");
      if (cout) n_overflow++;
      if ((a ^ b) == '1 && cin) n_ripple++;
    end

    // Fault-free Toffoli.
    for (int v = 0; v < 8; v++) begin
      {tg_a, tg_b, tg_c} = 3'(v);
      #1;
      check(tg_p == tg_a && tg_q == tg_b && tg_r == ((tg_a & tg_b) ^ tg_c), "Toffoli function");
      check(tg_garbage == (tg_a & tg_b), "Toffoli garbage AB");
      check(tg_fault == 1'b0, "no false alarm on the Toffoli circuit");
      if (tg_a & tg_b) n_tg_invert++;
    end

    // Single stuck-at faults in the adder.
    for (int site = 0; site < RCA_SITES; site++) begin
      for (int sv = 0; sv < 2; sv++) begin
        for (int v = 0; v < (1 << (2*N+1)); v++) begin
          {a, b, cin} = (2*N+1)'(v);
          val = 1'(sv);
          #1;
          rca_force(site);
          #1;
          if (good != val) begin
            check(rca_fault == 1'b1, "adder stuck-at fault detected");
            n_rca_detect++;
            if ({cout, sum} != rca_expect()) n_rca_detect_corrupt++;
          end else begin
            check(rca_fault == 1'b0 && {cout, sum} == rca_expect(), "inactive fault harmless");
            n_rca_masked++;
          end
          rca_release(site);
          #1;
        end
      end
    end

    // Single stuck-at faults in the Toffoli circuit.
    for (int site = 0; site < TG_SITES; site++) begin
      for (int sv = 0; sv < 2; sv++) begin
        for (int v = 0; v < 8; v++) begin
          {tg_a, tg_b, tg_c} = 3'(v);
          val = 1'(sv);
          #1;
          tg_force(site);
          #1;
          if (good != val) begin
            check(tg_fault == 1'b1, "Toffoli stuck-at fault detected");
            n_tg_detect++;
            if (tg_q != tg_b || tg_r != ((tg_a & tg_b) ^ tg_c)) n_tg_detect_corrupt++;
          end else begin
            check(tg_fault == 1'b0, "inactive Toffoli fault harmless");
          end
          tg_release(site);
          #1;
        end
      end
    end

    // After all faults are released the units work again.
    {a, b, cin} = {N'(9), N'(7), 1'b1};
    {tg_a, tg_b, tg_c} = 3'b110;
    #1;
    check({cout, sum} == 5'd17 && !rca_fault, "adder recovers after release");
    check(tg_r == 1'b1 && !tg_fault, "Toffoli recovers after release");

    $display("mechanisms: ripple=%0d overflow=%0d tg_invert=%0d rca_detect=%0d (corrupting %0d, inactive %0d) tg_detect=%0d (corrupting %0d)",
             n_ripple, n_overflow, n_tg_invert, n_rca_detect, n_rca_detect_corrupt,
             n_rca_masked, n_tg_detect, n_tg_detect_corrupt);
    check(n_ripple > 0, "carry rippled through all stages");
    check(n_overflow > 0, "carry-out overflow occurred");
    check(n_tg_invert > 0, "Toffoli target inverted");
    check(n_rca_detect > 0, "adder fault detected");
    check(n_rca_detect_corrupt > 0, "adder fault corrupting the sum detected");
    check(n_tg_detect > 0, "Toffoli fault detected");
    check(n_tg_detect_corrupt > 0, "Toffoli fault corrupting the output detected");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

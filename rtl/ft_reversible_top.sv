// ft_reversible_top: the two fault tolerant reversible circuits with their
// parity checks.
//
// Unit 1 is the N-bit fault tolerant ripple carry adder (ft_rca, 2N IG
// gates). Unit 2 is the parity preserving Toffoli circuit (pp_toffoli,
// one Fredkin and one Feynman double gate). Each unit is followed by a
// parity_checker that XORs every input line of the unit (constants
// included) against every output line (garbage included); the
// corresponding *_fault output goes high when any single line inside the
// unit has been flipped.
//
// The two units are independent circuits; they share this top only so
// that both can be built and simulated together. All constant inputs are
// tied to 0 here, as the circuits require. Every garbage output is brought
// out as a port, because a reversible circuit must not drop a line and the
// parity check needs them.
//
// Interface:
//   a, b [N-1:0], cin          adder operands and carry in
//   sum [N-1:0], cout          adder result
//   rca_garbage [3N-1:0]       adder garbage (3 per stage)
//   rca_fault                  adder parity mismatch
//   tg_a, tg_b, tg_c           Toffoli inputs
//   tg_p, tg_q, tg_r           Toffoli outputs A, B, AB^C
//   tg_garbage                 Toffoli garbage (AB)
//   tg_fault                   Toffoli parity mismatch
// Timing: purely combinational, no clock or reset.
module ft_reversible_top #(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  input  logic           cin,
  output logic [N-1:0]   sum,
  output logic           cout,
  output logic [3*N-1:0] rca_garbage,
  output logic           rca_fault,
  input  logic           tg_a,
  input  logic           tg_b,
  input  logic           tg_c,
  output logic           tg_p,
  output logic           tg_q,
  output logic           tg_r,
  output logic           tg_garbage,
  output logic           tg_fault
);
  localparam logic [2*N-1:0] RCA_CONST = '0;
  localparam logic           TG_CONST  = 1'b0;

  // ---------------- ripple carry adder ----------------
  ft_rca #(.N(N)) u_rca (
    .a       (a),
    .b       (b),
    .cin     (cin),
    .const_in(RCA_CONST),
    .sum     (sum),
    .cout    (cout),
    .garbage (rca_garbage)
  );

  parity_checker #(.IN_W(4*N + 1), .OUT_W(4*N + 1)) u_rca_check (
    .in_vec ({a, b, cin, RCA_CONST}),
    .out_vec({sum, cout, rca_garbage}),
    .fault  (rca_fault)
  );

  // ---------------- parity preserving Toffoli ----------------
  pp_toffoli u_tg (
    .a       (tg_a),
    .b       (tg_b),
    .c       (tg_c),
    .const_in(TG_CONST),
    .p       (tg_p),
    .q       (tg_q),
    .r       (tg_r),
    .garbage (tg_garbage)
  );

  parity_checker #(.IN_W(4), .OUT_W(4)) u_tg_check (
    .in_vec ({tg_a, tg_b, tg_c, TG_CONST}),
    .out_vec({tg_p, tg_q, tg_r, tg_garbage}),
    .fault  (tg_fault)
  );
endmodule

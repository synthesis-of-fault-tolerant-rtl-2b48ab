// ft_rca: N-bit fault tolerant reversible ripple carry adder.
//
// N fault tolerant full adders (ftfa) in series: stage i adds a[i], b[i]
// and the carry of stage i-1 (cin for stage 0) and hands its carry on;
// the carry of stage N-1 is cout. Per stage: S_i = A^B^C_i and
// C_{i+1} = (A^B)C_i ^ AB. In total 2N IG gates, 2N constant inputs and
// 3N garbage outputs; counted in gate levels along the carry chain, the
// paper's cost table charges 2 unit delays per stage, 2N in all.
//
// Interface: a, b are the N-bit operands, cin the carry in. const_in
// holds the two constant inputs of each stage (bits 2i+1:2i for stage i),
// 0 in normal use. sum is N bits, cout the carry out, garbage holds the
// three garbage outputs of each stage (bits 3i+2:3i for stage i, in the
// order G1, G2, G3 of ftfa).
// Timing: combinational; the longest path runs through the second IG of
// every stage.
//
// N defaults to 4, the width of the drawn example; any N >= 1 works.
module ft_rca #(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  input  logic           cin,
  input  logic [2*N-1:0] const_in,
  output logic [N-1:0]   sum,
  output logic           cout,
  output logic [3*N-1:0] garbage
);
  // Cost figures of this structure, as counted in the paper's comparison.
  localparam int unsigned GATE_COUNT    = 2 * N;
  localparam int unsigned GARBAGE_COUNT = 3 * N;
  localparam int unsigned CONST_COUNT   = 2 * N;
  localparam int unsigned UNIT_DELAY    = 2 * N;

  logic [N:0] carry;

  assign carry[0] = cin;
  assign cout     = carry[N];

  for (genvar i = 0; i < N; i++) begin : g_stage
    ftfa u_fa (
      .a       (a[i]),
      .b       (b[i]),
      .cin     (carry[i]),
      .const_in(const_in[2*i +: 2]),
      .sum     (sum[i]),
      .cout    (carry[i+1]),
      .garbage (garbage[3*i +: 3])
    );
  end
endmodule

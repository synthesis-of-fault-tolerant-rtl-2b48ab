// parity_checker: flags a parity mismatch between a reversible circuit's
// inputs and its outputs.
//
// A network made only of parity preserving gates, with no fan-out, keeps
// XOR(all inputs) == XOR(all outputs), constants and garbage lines
// included. A fault that flips any single line inside it breaks that
// equality, so comparing the two parities at the primary outputs detects
// it. fault = ^in_vec ^ ^out_vec.
//
// The parity check as the way to detect a fault is the paper's idea; this
// checker is ordinary (irreversible) logic outside the reversible network,
// and its form - one XOR tree over each side - is this design's choice.
//
// Interface: in_vec (IN_W bits) and out_vec (OUT_W bits) in, fault out.
// Timing: combinational.
module parity_checker #(
  parameter int unsigned IN_W  = 1,
  parameter int unsigned OUT_W = 1
) (
  input  logic [IN_W-1:0]  in_vec,
  input  logic [OUT_W-1:0] out_vec,
  output logic             fault
);
  always_comb fault = (^in_vec) ^ (^out_vec);
endmodule

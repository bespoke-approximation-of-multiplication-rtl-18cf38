// approx_comparator: comparator of the approximate argmax that looks only at
// a chosen subset of the bits of its two operands.
//
// The operands are signed output-neuron values. Each is mapped to offset
// binary (its sign bit inverted), which orders signed numbers as unsigned
// ones; then only the bits set in MASK are kept and the two masked words are
// compared as unsigned numbers. With MASK all ones the comparison is exact.
// Dropping low bits gives a coarse comparison of numbers that are far apart,
// dropping high bits a comparison of numbers that are close, and any other
// subset is allowed (the subset is found offline by a greedy search per pair
// of neurons).
//
// Comparing only a subset of bits is the described approximation; the
// offset-binary mapping and the tie rule are this design's choices.
//
// b_wins is 1 when the masked b is strictly greater than the masked a, so
// ties go to a. Combinational.
module approx_comparator #(
  parameter int unsigned W    = 16,
  parameter logic [W-1:0] MASK = '1
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic                b_wins
);
  logic [W-1:0] ka, kb;

  assign ka = {~a[W-1], a[W-2:0]} & MASK;
  assign kb = {~b[W-1], b[W-2:0]} & MASK;
  assign b_wins = kb > ka;

endmodule

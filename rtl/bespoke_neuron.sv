// bespoke_neuron: one neuron of the bespoke MLP, before its activation.
//
// All inputs of a neuron are non-negative (4-bit features or QRelu outputs),
// so the weights are split by sign: one po2_adder_tree adds the inputs with
// positive weights, a second adds the inputs with negative weights using
// their absolute values, and a single subtractor forms
//     pre = sum_pos - sum_neg.
// The two trees therefore work on unsigned numbers only and need no sign
// extension; only the final subtraction is signed. The power-of-two bias
// joins the tree of its own sign. MASK carries the summand bits kept by the
// accumulation approximation, shared by both trees (each summand belongs to
// exactly one of them).
//
// The sign split, the separate accumulation and the final subtraction are
// the described neuron structure; the shared mask layout and the result
// width AW+1 are this design's choices.
//
// Interface: a[i] unsigned IW-bit inputs, pre signed (AW+1)-bit result.
// Combinational.
module bespoke_neuron #(
  parameter int unsigned N    = 4,
  parameter int unsigned IW   = mlp_pkg::IN_W,
  parameter int unsigned AW   = IW + mlp_pkg::MAX_SHIFT + $clog2(N + 1),
  parameter logic [N*mlp_pkg::CODE_W-1:0] W = (N*mlp_pkg::CODE_W)'(mlp_pkg::gen_weights(2, 1, N)),
  parameter logic [N*IW-1:0]   MASK = (N*IW)'(mlp_pkg::gen_mask(2, 1, N, IW)),
  parameter mlp_pkg::wcode_t   BIAS = 8'h85
) (
  input  logic [IW-1:0]        a [N],
  output logic signed [AW:0]   pre
);

  logic [AW-1:0] sum_pos, sum_neg;

  po2_adder_tree #(
    .N(N), .IW(IW), .OW(AW), .W(W), .MASK(MASK), .NEG(1'b0), .BIAS(BIAS), .USE_BIAS(1'b1)
  ) u_pos (
    .a(a), .sum(sum_pos)
  );

  po2_adder_tree #(
    .N(N), .IW(IW), .OW(AW), .W(W), .MASK(MASK), .NEG(1'b1), .BIAS(BIAS), .USE_BIAS(1'b1)
  ) u_neg (
    .a(a), .sum(sum_neg)
  );

  assign pre = $signed({1'b0, sum_pos}) - $signed({1'b0, sum_neg});

endmodule

// po2_adder_tree: semi-bespoke, approximate adder tree of one sign of a neuron.
//
// With power-of-two weights a product a_i * 2^e_i is only the input a_i wired
// e_i columns to the left, so the multipliers disappear and the tree is fed
// by the input bits themselves, with constant zeros in the columns below and
// above them. This module takes N unsigned IW-bit inputs and adds those whose
// hardwired weight has the sign selected by NEG (0: positive weights,
// 1: negative weights, of which the absolute value is used). The weights are
// compile-time codes (see mlp_pkg), so every shift is plain wiring.
//
// Accumulation approximation: MASK holds one keep bit per summand bit
// (bit i*IW+b for bit b of input i). A removed bit is replaced by a constant
// zero, and the synthesis tool's constant propagation then deletes the
// adder cells that bit fed. The bias, also a power of two, is added as one
// more constant summand when its sign matches NEG and USE_BIAS is set.
//
// The tree is written as a plain sum of the kept, shifted summands, leaving
// the choice of reduction structure to synthesis (the paper's area model
// counts carry-save full adders but prescribes no reduction scheme).
//
// Interface: a[i] inputs, sum output (OW bits, unsigned). Purely
// combinational, no clock.
module po2_adder_tree #(
  parameter int unsigned N        = 4,
  parameter int unsigned IW       = mlp_pkg::IN_W,
  parameter int unsigned OW       = IW + mlp_pkg::MAX_SHIFT + $clog2(N + 1),
  parameter logic [N*mlp_pkg::CODE_W-1:0] W = (N*mlp_pkg::CODE_W)'(mlp_pkg::gen_weights(1, 1, N)),
  parameter logic [N*IW-1:0]       MASK     = (N*IW)'(mlp_pkg::gen_mask(1, 1, N, IW)),
  parameter bit                    NEG      = 1'b0,
  parameter mlp_pkg::wcode_t       BIAS     = 8'h03,
  parameter bit                    USE_BIAS = 1'b1
) (
  input  logic [IW-1:0] a [N],
  output logic [OW-1:0] sum
);
  import mlp_pkg::*;

  // Elaboration-time checks on the hardwired constants.
  for (genvar i = 0; i < N; i++) begin : g_chk
    if (!code_is_zero(W[i*CODE_W +: CODE_W]) &&
        code_shift(W[i*CODE_W +: CODE_W]) + IW > OW) begin : g_bad
      $error("po2_adder_tree: weight %0d shifts its input past the %0d-bit sum", i, OW);
    end
  end
  if (USE_BIAS && code_is_neg(BIAS) == NEG && code_shift(BIAS) >= OW) begin : g_bad_bias
    $error("po2_adder_tree: bias exponent does not fit the %0d-bit sum", OW);
  end

  // Summand i: the kept bits of a[i], placed at the weight's exponent.
  localparam logic [OW-1:0] BIAS_TERM =
      (USE_BIAS && code_is_neg(BIAS) == NEG) ? (OW'(1) << code_shift(BIAS)) : '0;

  always_comb begin
    sum = BIAS_TERM;
    for (int unsigned i = 0; i < N; i++) begin
      if (!code_is_zero(W[i*CODE_W +: CODE_W]) && code_is_neg(W[i*CODE_W +: CODE_W]) == NEG)
        sum += OW'(a[i] & MASK[i*IW +: IW]) << code_shift(W[i*CODE_W +: CODE_W]);
    end
  end

endmodule

// approx_argmax: output-layer activation, the index of the largest of N
// signed output-neuron values, computed by a tree of approximate comparators.
//
// Stage s receives C_s candidates (C_0 = N, C_{s+1} = ceil(C_s / 2)). A
// per-stage pairing order first permutes the candidates into slots; slots
// (2k, 2k+1) meet in one approx_comparator and the winner's full value and
// index move on; an odd last slot passes unopposed. Which outputs meet is a
// design-time choice (the offline flow picks, stage by stage, the pairing
// that needs the fewest compared bits), and so is the bit subset of every
// comparator. There are N-1 comparators in total, numbered stage by stage.
//
// Parameters:
//   CMP_MASK  32 bits per comparator c at [c*32 +: 32]; bit j = compare bit j
//             of the offset-binary operands (only the low W bits are used).
//   ORDER     8 bits per (stage s, slot p) at [(s*64+p)*8 +: 8]: the stage
//             input placed in slot p. Each stage's entries must be a
//             permutation of 0..C_s-1.
// Ties, as seen through the mask, go to the value in the even slot.
// A comparator tree with chosen pairings and bit subsets is the described
// approximate argmax; the permutation encoding, the unopposed pass of an odd
// candidate and the tie rule are this design's choices.
//
// Interface: x[i] signed W-bit values, idx the winning position in x.
// Combinational.
module approx_argmax #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 20,
  parameter logic [mlp_pkg::MAX_NEURONS*mlp_pkg::CMP_MASK_W-1:0] CMP_MASK =
      mlp_pkg::gen_cmp_mask(N - 1),
  parameter logic [mlp_pkg::MAX_STAGES*mlp_pkg::MAX_NEURONS*mlp_pkg::ORDER_W-1:0] ORDER =
      mlp_pkg::gen_order(N),
  localparam int unsigned IDW = (N > 1) ? $clog2(N) : 1
) (
  input  logic signed [W-1:0] x [N],
  output logic [IDW-1:0]      idx
);
  import mlp_pkg::*;

  localparam int unsigned S = num_stages(N);

  if (N > MAX_NEURONS || S > MAX_STAGES) begin : g_bad_n
    $error("approx_argmax: N=%0d exceeds the parameter layout", N);
  end
  if (W > CMP_MASK_W) begin : g_bad_w
    $error("approx_argmax: W=%0d exceeds the comparator mask width", W);
  end

  // Each stage block holds the candidates it passes on (nv/ni); stage s
  // reads those of stage s-1, stage 0 reads x.
  for (genvar s = 0; s < S; s++) begin : g_stage
    localparam int unsigned C    = stage_count(N, s);
    localparam int unsigned P    = C / 2;
    localparam int unsigned BASE = stage_base(N, s);

    logic signed [W-1:0] sv [C];
    logic [IDW-1:0]      si [C];
    logic signed [W-1:0] nv [(C+1)/2];
    logic [IDW-1:0]      ni [(C+1)/2];

    for (genvar p = 0; p < C; p++) begin : g_slot
      localparam int unsigned SRC = int'(ORDER[(s*MAX_NEURONS+p)*ORDER_W +: ORDER_W]);
      if (SRC >= C) begin : g_bad
        $error("approx_argmax: ORDER entry (%0d,%0d) out of range", s, p);
      end
      if (s == 0) begin : g_first
        assign sv[p] = x[SRC];
        assign si[p] = IDW'(SRC);
      end else begin : g_next
        assign sv[p] = g_stage[s-1].nv[SRC];
        assign si[p] = g_stage[s-1].ni[SRC];
      end
    end

    for (genvar k = 0; k < P; k++) begin : g_cmp
      logic b_wins;
      approx_comparator #(
        .W(W), .MASK(CMP_MASK[(BASE+k)*CMP_MASK_W +: W])
      ) u_cmp (
        .a(sv[2*k]), .b(sv[2*k+1]), .b_wins(b_wins)
      );
      assign nv[k] = b_wins ? sv[2*k+1] : sv[2*k];
      assign ni[k] = b_wins ? si[2*k+1] : si[2*k];
    end

    if (C % 2 == 1) begin : g_bye
      assign nv[P] = sv[C-1];
      assign ni[P] = si[C-1];
    end
  end

  if (S == 0) begin : g_single
    assign idx = '0;
  end else begin : g_result
    assign idx = g_stage[S-1].ni[0];
  end

endmodule

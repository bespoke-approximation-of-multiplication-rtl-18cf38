// mlp_top: bespoke, fully parallel, approximate MLP classifier with one hidden
// layer (QRelu) and an output layer followed by an approximate argmax.
//
// Every weight is a hardwired power of two, so no multiplier exists: each
// neuron is two semi-bespoke adder trees (positive and negative weights)
// and a subtractor (bespoke_neuron). The hidden pre-activations pass through
// an 8-bit linear QRelu; the output-layer pre-activations go straight to
// the argmax, a tree of comparators that each look at only a chosen subset
// of bits. Summand bits removed by the accumulation approximation are given
// per neuron as keep masks. The whole network is one combinational cloud:
// one inference per clock cycle.
//
// Timing: x is sampled together with in_valid at a rising clock edge; the
// class of that sample is in class_idx, with out_valid high, from that edge
// on until the next edge (latency one cycle, one new inference per cycle).
// class_idx holds its value while in_valid is low. rst_n is an active-low
// synchronous reset that clears out_valid and class_idx. The output register
// and the handshake are this design's choices; the datapath follows the
// described architecture.
//
// Defaults: the topology (274, 5, 16) is the largest network evaluated
// (Arrhythmia). Trained weights and approximation settings are not
// available, so the defaults of the constant parameters are a fixed
// pseudo-random pattern produced by mlp_pkg; override them with trained
// values. Parameter layout: see mlp_pkg and approx_argmax.
module mlp_top #(
  parameter int unsigned NUM_IN     = 274,
  parameter int unsigned NUM_HID    = 5,
  parameter int unsigned NUM_OUT    = 16,
  parameter int unsigned HID_QSHIFT = 5,
  parameter logic [NUM_HID*NUM_IN*mlp_pkg::CODE_W-1:0] HID_W =
      (NUM_HID*NUM_IN*mlp_pkg::CODE_W)'(mlp_pkg::gen_weights(11, NUM_HID, NUM_IN)),
  parameter logic [NUM_HID*NUM_IN*mlp_pkg::IN_W-1:0] HID_MASK =
      (NUM_HID*NUM_IN*mlp_pkg::IN_W)'(mlp_pkg::gen_mask(12, NUM_HID, NUM_IN, mlp_pkg::IN_W)),
  parameter logic [NUM_HID*mlp_pkg::CODE_W-1:0] HID_BIAS =
      (NUM_HID*mlp_pkg::CODE_W)'(mlp_pkg::gen_bias(13, NUM_HID,
                                   mlp_pkg::IN_W + mlp_pkg::MAX_SHIFT - 1)),
  parameter logic [NUM_OUT*NUM_HID*mlp_pkg::CODE_W-1:0] OUT_W =
      (NUM_OUT*NUM_HID*mlp_pkg::CODE_W)'(mlp_pkg::gen_weights(21, NUM_OUT, NUM_HID)),
  parameter logic [NUM_OUT*NUM_HID*mlp_pkg::Q_W-1:0] OUT_MASK =
      (NUM_OUT*NUM_HID*mlp_pkg::Q_W)'(mlp_pkg::gen_mask(22, NUM_OUT, NUM_HID, mlp_pkg::Q_W)),
  parameter logic [NUM_OUT*mlp_pkg::CODE_W-1:0] OUT_BIAS =
      (NUM_OUT*mlp_pkg::CODE_W)'(mlp_pkg::gen_bias(23, NUM_OUT,
                                   mlp_pkg::Q_W + mlp_pkg::MAX_SHIFT - 1)),
  parameter logic [mlp_pkg::MAX_NEURONS*mlp_pkg::CMP_MASK_W-1:0] CMP_MASK =
      mlp_pkg::gen_cmp_mask(NUM_OUT - 1),
  parameter logic [mlp_pkg::MAX_STAGES*mlp_pkg::MAX_NEURONS*mlp_pkg::ORDER_W-1:0] ORDER =
      mlp_pkg::gen_order(NUM_OUT),
  localparam int unsigned CLS_W = (NUM_OUT > 1) ? $clog2(NUM_OUT) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [mlp_pkg::IN_W-1:0] x [NUM_IN],
  output logic                     out_valid,
  output logic [CLS_W-1:0]         class_idx
);
  import mlp_pkg::*;

  localparam int unsigned HID_AW = IN_W + MAX_SHIFT + $clog2(NUM_IN + 1);
  localparam int unsigned OUT_AW = Q_W + MAX_SHIFT + $clog2(NUM_HID + 1);

  // ---- hidden layer: bespoke neurons + QRelu --------------------------------
  logic signed [HID_AW:0] hid_pre [NUM_HID];
  logic [Q_W-1:0]         hid_act [NUM_HID];

  for (genvar n = 0; n < NUM_HID; n++) begin : g_hid
    bespoke_neuron #(
      .N(NUM_IN), .IW(IN_W), .AW(HID_AW),
      .W   (HID_W   [n*NUM_IN*CODE_W +: NUM_IN*CODE_W]),
      .MASK(HID_MASK[n*NUM_IN*IN_W   +: NUM_IN*IN_W]),
      .BIAS(HID_BIAS[n*CODE_W        +: CODE_W])
    ) u_neuron (
      .a(x), .pre(hid_pre[n])
    );

    qrelu #(
      .XW(HID_AW + 1), .OW(Q_W), .SHIFT(HID_QSHIFT)
    ) u_qrelu (
      .x(hid_pre[n]), .y(hid_act[n])
    );
  end

  // ---- output layer: bespoke neurons ----------------------------------------
  logic signed [OUT_AW:0] out_pre [NUM_OUT];

  for (genvar n = 0; n < NUM_OUT; n++) begin : g_out
    bespoke_neuron #(
      .N(NUM_HID), .IW(Q_W), .AW(OUT_AW),
      .W   (OUT_W   [n*NUM_HID*CODE_W +: NUM_HID*CODE_W]),
      .MASK(OUT_MASK[n*NUM_HID*Q_W    +: NUM_HID*Q_W]),
      .BIAS(OUT_BIAS[n*CODE_W         +: CODE_W])
    ) u_neuron (
      .a(hid_act), .pre(out_pre[n])
    );
  end

  // ---- approximate argmax ---------------------------------------------------
  logic [CLS_W-1:0] cls;

  approx_argmax #(
    .N(NUM_OUT), .W(OUT_AW + 1), .CMP_MASK(CMP_MASK), .ORDER(ORDER)
  ) u_argmax (
    .x(out_pre), .idx(cls)
  );

  // ---- output register ------------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      class_idx <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) class_idx <= cls;
    end
  end

endmodule

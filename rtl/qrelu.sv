// qrelu: linear quantized ReLU with truncation (hidden-layer activation).
//
//     y = 0                                    if x < 0
//     y = min(floor(x / 2^SHIFT), 2^OW - 1)    otherwise
//
// The SHIFT least significant bits of the pre-activation are dropped
// (truncation, no rounding), negative values are nullified by AND gates on
// the sign bit, and values above the output range are clipped by OR-ing the
// dropped high bits into every output bit. The result is OW bits (8 in this
// design), which keeps the adder trees of the next layer narrow.
//
// Truncation, AND-gate nullification and OR-gate clipping to 8 bits follow
// the described QRelu; the generic widths are this design's choice.
//
// Interface: x signed XW-bit pre-activation, y unsigned OW-bit activation.
// Combinational. SHIFT is the per-layer quantisation step, fixed at design
// time; its value comes from training and is a parameter here.
module qrelu #(
  parameter int unsigned XW    = 16,
  parameter int unsigned OW    = mlp_pkg::Q_W,
  parameter int unsigned SHIFT = 4
) (
  input  logic signed [XW-1:0] x,
  output logic [OW-1:0]        y
);
  // Magnitude bits of x that survive the truncation.
  localparam int unsigned MW = XW - 1 - SHIFT;

  if (XW < SHIFT + 2) begin : g_bad
    $error("qrelu: SHIFT leaves no magnitude bits");
  end

  logic [MW-1:0] mag;
  logic [OW-1:0] low;
  logic          over;

  assign mag = x[XW-2:SHIFT];

  if (MW > OW) begin : g_clip
    assign low  = mag[OW-1:0];
    assign over = |mag[MW-1:OW];
  end else begin : g_noclip
    assign low  = OW'(mag);
    assign over = 1'b0;
  end

  assign y = {OW{~x[XW-1]}} & (low | {OW{over}});

endmodule

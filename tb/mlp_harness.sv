// mlp_harness: stimulus and checker for one mlp_top instance, shared by the
// end-to-end testbenches. It resets the classifier, then on every clock
// cycle presents a random 4-bit feature vector; every seventh cycle in_valid
// is low (and the features change) to check that the result register holds.
// One cycle after each accepted vector it compares out_valid and class_idx
// with mlp_ref_pkg::infer, evaluated on the same default parameter vectors
// the instance uses (the mlp_pkg generators with mlp_top's seeds). It
// also checks the reset values and counts the mechanisms the reference
// reports. done rises after NVEC accepted vectors.
module mlp_harness #(
  parameter int NUM_IN  = 274,
  parameter int NUM_HID = 5,
  parameter int NUM_OUT = 16,
  parameter int QSHIFT  = 5,
  parameter int NVEC    = 200,
  localparam int CLS_W  = (NUM_OUT > 1) ? $clog2(NUM_OUT) : 1
) (
  input  logic                     clk,
  output logic                     rst_n,
  output logic                     in_valid,
  output logic [mlp_pkg::IN_W-1:0] x [NUM_IN],
  input  logic                     out_valid,
  input  logic [CLS_W-1:0]         class_idx,
  output logic                     done,
  output int                       checks,
  output int                       failures,
  output int                       holds,
  output mlp_ref_pkg::stats_t      stats
);
  import mlp_pkg::*;
  import mlp_ref_pkg::*;

  // Same vectors as the defaults of mlp_top.
  localparam logic [MAX_WEIGHTS*CODE_W-1:0] HW = gen_weights(11, NUM_HID, NUM_IN);
  localparam logic [MAX_WEIGHTS*Q_W-1:0]    HM = gen_mask(12, NUM_HID, NUM_IN, IN_W);
  localparam logic [MAX_NEURONS*CODE_W-1:0] HB = gen_bias(13, NUM_HID, IN_W + MAX_SHIFT - 1);
  localparam logic [MAX_WEIGHTS*CODE_W-1:0] OW = gen_weights(21, NUM_OUT, NUM_HID);
  localparam logic [MAX_WEIGHTS*Q_W-1:0]    OM = gen_mask(22, NUM_OUT, NUM_HID, Q_W);
  localparam logic [MAX_NEURONS*CODE_W-1:0] OB = gen_bias(23, NUM_OUT, Q_W + MAX_SHIFT - 1);
  localparam logic [MAX_NEURONS*CMP_MASK_W-1:0] CM = gen_cmp_mask(NUM_OUT - 1);
  localparam logic [MAX_STAGES*MAX_NEURONS*ORDER_W-1:0] OR = gen_order(NUM_OUT);

  initial begin
    int xv [];
    int exp_cls, exact_cls, held, accepted;
    bit prev_valid;
    xv = new[NUM_IN];
    checks = 0; failures = 0; holds = 0; done = 1'b0;
    foreach (stats[i]) stats[i] = 0;
    rst_n = 1'b0; in_valid = 1'b0;
    foreach (x[i]) x[i] = '0;
    repeat (3) @(negedge clk);
    checks++;
    if (out_valid !== 1'b0 || class_idx !== '0) begin
      failures++;
      $display("reset values wrong: out_valid=%0b class_idx=%0d", out_valid, class_idx);
    end
    rst_n = 1'b1;
    held = 0; accepted = 0; prev_valid = 0; exp_cls = 0;
    for (int cyc = 0; accepted < NVEC || prev_valid; cyc++) begin
      // result of the previous cycle
      if (cyc > 0) begin
        checks++;
        if (prev_valid) begin
          if (out_valid !== 1'b1 || int'(class_idx) != exp_cls) begin
            failures++;
            $display("cycle %0d: out_valid=%0b class=%0d expected %0d", cyc, out_valid, class_idx, exp_cls);
          end
          held = exp_cls;
        end else begin
          if (out_valid !== 1'b0 || int'(class_idx) != held) begin
            failures++;
            $display("cycle %0d: idle cycle changed the output (%0b, %0d)", cyc, out_valid, class_idx);
          end
        end
      end
      // new stimulus
      foreach (x[i]) begin
        x[i] = IN_W'($urandom);
        xv[i] = int'(x[i]);
      end
      if (accepted < NVEC && cyc % 7 != 6) begin
        in_valid = 1'b1;
        exp_cls = infer(NUM_IN, NUM_HID, NUM_OUT, QSHIFT, HW, HM, HB, OW, OM, OB, CM, OR,
                        xv, exact_cls, stats);
        accepted++;
        prev_valid = 1;
      end else begin
        in_valid = 1'b0;
        if (cyc > 0) holds++;
        prev_valid = 0;
      end
      @(negedge clk);
    end
    done = 1'b1;
  end
endmodule

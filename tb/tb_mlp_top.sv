// tb_mlp_top: end-to-end test of the classifier at its default size
// (274 inputs, 5 hidden neurons, 16 classes) and default parameters.
// mlp_harness streams random feature vectors, one per cycle with periodic
// idle cycles, and checks every class against the integer reference model,
// including the one-cycle latency. The test fails unless QRelu nullification
// and clipping, the effect of removed summand bits, approximate comparator
// decisions that differ from exact ones, and idle (hold) cycles all occur.
module tb_mlp_top;
  localparam int NUM_IN = 274, NUM_HID = 5, NUM_OUT = 16;

  logic clk = 1'b0;
  logic rst_n, in_valid, out_valid;
  logic [mlp_pkg::IN_W-1:0] x [NUM_IN];
  logic [$clog2(NUM_OUT)-1:0] class_idx;
  logic done;
  int checks, failures, holds, cycles = 0;
  mlp_ref_pkg::stats_t stats;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  mlp_top dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
    .out_valid(out_valid), .class_idx(class_idx)
  );

  mlp_harness #(.NUM_IN(NUM_IN), .NUM_HID(NUM_HID), .NUM_OUT(NUM_OUT), .QSHIFT(5), .NVEC(400)) h (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
    .out_valid(out_valid), .class_idx(class_idx),
    .done(done), .checks(checks), .failures(failures), .holds(holds), .stats(stats)
  );

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic need(string what, int n);
    $display("%-32s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end
    checks++;
  endtask

  initial begin
    wait (done);
    need("QRelu nullifications", stats[mlp_ref_pkg::ST_NULLIFY]);
    need("QRelu clips", stats[mlp_ref_pkg::ST_CLIP]);
    need("removed summand bits that were 1", stats[mlp_ref_pkg::ST_REMOVED]);
    need("approximate comparator decisions", stats[mlp_ref_pkg::ST_CMP_DIFF]);
    need("idle (hold) cycles", holds);
    $display("argmax results differing from exact: %0d", stats[mlp_ref_pkg::ST_CLS_DIFF]);
    $display("cycles: %0d", cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mlp_workloads: end-to-end runs of the classifier at the topologies of
// the five smaller evaluated networks (inputs, hidden, classes):
// Breast Cancer (10,3,2), Cardio (21,3,3), Pendigits (16,5,10),
// Red Wine (11,2,6) and White Wine (11,4,7). The largest one, Arrhythmia
// (274,5,16), is the default size and is run by tb_mlp_top. Each instance
// gets the default pseudo-random constants for its size and is checked by
// its own mlp_harness against the integer reference model. The odd class
// counts (3, 7) exercise argmax byes; the test fails unless byes, QRelu
// nullification and removed summand bits that were 1 occur.
module tb_mlp_workloads;
  import mlp_pkg::*;
  localparam int NW = 5;
  localparam int TI [NW] = '{10, 21, 16, 11, 11};
  localparam int TH [NW] = '{ 3,  3,  5,  2,  4};
  localparam int TO [NW] = '{ 2,  3, 10,  6,  7};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [NW-1:0] done;
  int chk [NW], fail [NW], hold [NW];
  mlp_ref_pkg::stats_t st [NW];

  for (genvar w = 0; w < NW; w++) begin : g_w
    localparam int CW = (TO[w] > 1) ? $clog2(TO[w]) : 1;
    logic rst_n, in_valid, out_valid;
    logic [IN_W-1:0] x [TI[w]];
    logic [CW-1:0] class_idx;

    mlp_top #(.NUM_IN(TI[w]), .NUM_HID(TH[w]), .NUM_OUT(TO[w])) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
      .out_valid(out_valid), .class_idx(class_idx)
    );

    mlp_harness #(.NUM_IN(TI[w]), .NUM_HID(TH[w]), .NUM_OUT(TO[w]), .QSHIFT(5), .NVEC(500)) h (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .x(x),
      .out_valid(out_valid), .class_idx(class_idx),
      .done(done[w]), .checks(chk[w]), .failures(fail[w]), .holds(hold[w]), .stats(st[w])
    );
  end

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    automatic int byes = 0, nulls = 0, removed = 0, clips = 0;
    wait (&done);
    for (int w = 0; w < NW; w++) begin
      $display("(%0d,%0d,%0d): checks=%0d failures=%0d nullify=%0d clip=%0d removed=%0d cmpdiff=%0d byes=%0d",
               TI[w], TH[w], TO[w], chk[w], fail[w], st[w][mlp_ref_pkg::ST_NULLIFY],
               st[w][mlp_ref_pkg::ST_CLIP], st[w][mlp_ref_pkg::ST_REMOVED],
               st[w][mlp_ref_pkg::ST_CMP_DIFF], st[w][mlp_ref_pkg::ST_BYE]);
      checks += chk[w];
      failures += fail[w];
      byes += st[w][mlp_ref_pkg::ST_BYE];
      nulls += st[w][mlp_ref_pkg::ST_NULLIFY];
      clips += st[w][mlp_ref_pkg::ST_CLIP];
      removed += st[w][mlp_ref_pkg::ST_REMOVED];
    end
    checks += 3;
    if (byes == 0)    begin failures++; $display("argmax bye never exercised"); end
    if (nulls == 0)   begin failures++; $display("QRelu nullification never exercised"); end
    if (removed == 0) begin failures++; $display("removed summand bits never exercised"); end
    $display("QRelu clips over all workloads: %0d", clips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

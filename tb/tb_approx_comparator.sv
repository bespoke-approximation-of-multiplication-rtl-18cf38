// tb_approx_comparator: self-checking test of the bit-subset comparator.
// An exact instance (all bits) and an approximate one (bits 7:3 and 1 of a
// 10-bit word) are driven with random and corner pairs of signed values;
// the expected decision is recomputed from offset-binary integers. Also
// requires that the approximate decision differs from the exact one at
// least once.
module tb_approx_comparator;
  localparam int W = 10;
  localparam logic [W-1:0] M = 10'b0011111010;

  logic signed [W-1:0] a, b;
  logic bw_exact, bw_apx;
  int checks = 0, failures = 0, n_diff = 0;
  logic clk = 0;

  approx_comparator #(.W(W))           dut_e (.a(a), .b(b), .b_wins(bw_exact));
  approx_comparator #(.W(W), .MASK(M)) dut_a (.a(a), .b(b), .b_wins(bw_apx));

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int ua, ub;
    logic ee, ea;
    ua = int'(a) + (1 << (W-1));   // offset binary as an integer
    ub = int'(b) + (1 << (W-1));
    ee = int'(b) > int'(a);
    ea = (ub & int'(M)) > (ua & int'(M));
    #1;
    checks += 2;
    if (bw_exact != ee) begin failures++; $display("exact a=%0d b=%0d got %0b", a, b, bw_exact); end
    if (bw_apx   != ea) begin failures++; $display("apx a=%0d b=%0d got %0b", a, b, bw_apx); end
    if (ea != ee) n_diff++;
  endtask

  initial begin
    a = -512; b = 511; check();
    a = 511; b = -512; check();
    a = -1; b = 0; check();
    a = 5; b = 5; check();
    for (int k = 0; k < 5000; k++) begin
      a = W'($urandom);
      b = (k % 2 == 1) ? W'(int'(a) + int'($urandom_range(0, 6)) - 3) : W'($urandom);
      check();
    end
    checks++;
    if (n_diff == 0) failures++;
    $display("approximate decisions differing from exact: %0d", n_diff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_po2_adder_tree: self-checking test of the approximate power-of-two
// adder tree. Two instances share six hardwired weights (mixed signs, one
// zero weight, exponents 0..7) and a summand mask with removed bits in
// several columns; one adds the positive, the other the negative weights,
// with the bias in the negative tree. Random and corner inputs are applied
// and both sums are compared with a reference computed from the weight
// values as integers (a_i AND mask_i) * 2^e_i.
module tb_po2_adder_tree;
  localparam int N  = 6;
  localparam int IW = 4;
  localparam int OW = 15;
  // weight i = sgn[i] * 2^sh[i]; sh = -1 is a zero weight
  localparam int SH  [N] = '{0, 3, 7, -1, 2, 5};
  localparam int SGN [N] = '{1, -1, 1, 1, -1, 1};
  localparam logic [IW-1:0] MK [N] = '{4'b1111, 4'b1110, 4'b0111, 4'b1111, 4'b1011, 4'b1101};
  localparam int BIAS_SH = 6;   // bias = -2^6

  function automatic logic [N*8-1:0] codes();
    logic [N*8-1:0] v;
    for (int i = 0; i < N; i++)
      v[i*8 +: 8] = (SH[i] < 0) ? 8'h7F : {SGN[i] < 0, 7'(SH[i])};
    return v;
  endfunction
  function automatic logic [N*IW-1:0] masks();
    logic [N*IW-1:0] v;
    for (int i = 0; i < N; i++) v[i*IW +: IW] = MK[i];
    return v;
  endfunction

  logic [IW-1:0] a [N];
  logic [OW-1:0] sum_p, sum_n;
  logic clk = 0;
  int checks = 0, failures = 0, cycles = 0;

  po2_adder_tree #(.N(N), .IW(IW), .OW(OW), .W(codes()), .MASK(masks()),
                   .NEG(1'b0), .BIAS({1'b1, 7'(BIAS_SH)}), .USE_BIAS(1'b1))
    dut_p (.a(a), .sum(sum_p));
  po2_adder_tree #(.N(N), .IW(IW), .OW(OW), .W(codes()), .MASK(masks()),
                   .NEG(1'b1), .BIAS({1'b1, 7'(BIAS_SH)}), .USE_BIAS(1'b1))
    dut_n (.a(a), .sum(sum_n));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int ep = 0, en = 1 << BIAS_SH;
    for (int i = 0; i < N; i++) begin
      int t;
      if (SH[i] < 0) continue;
      t = (int'(a[i]) & int'(MK[i])) * (1 << SH[i]);
      if (SGN[i] > 0) ep += t; else en += t;
    end
    #1;
    checks += 2;
    if (int'(sum_p) != ep) begin
      failures++;
      $display("pos mismatch: got %0d exp %0d", sum_p, ep);
    end
    if (int'(sum_n) != en) begin
      failures++;
      $display("neg mismatch: got %0d exp %0d", sum_n, en);
    end
  endtask

  initial begin
    foreach (a[i]) a[i] = '1;
    check();
    foreach (a[i]) a[i] = '0;
    check();
    for (int k = 0; k < 2000; k++) begin
      foreach (a[i]) a[i] = IW'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

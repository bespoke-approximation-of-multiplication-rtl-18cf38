// tb_bespoke_neuron: self-checking test of one neuron with five 8-bit inputs
// (the shape of an output-layer neuron). The hardwired weights mix both
// signs, a zero weight and exponents up to 7; some summand bits are removed;
// the bias is positive. The signed pre-activation is compared with the
// integer sum of sign * (a AND mask) * 2^e plus bias. Requires that both
// negative and positive results occur.
module tb_bespoke_neuron;
  localparam int N  = 5;
  localparam int IW = 8;
  localparam int AW = IW + 7 + 3;
  localparam int SH  [N] = '{7, 1, -1, 4, 6};
  localparam int SGN [N] = '{-1, 1, 1, 1, -1};
  localparam logic [IW-1:0] MK [N] = '{8'hFF, 8'b1110_1111, 8'hFF, 8'b0111_1110, 8'b1111_0011};
  localparam int BIAS_SH = 9;   // bias = +2^9

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
  logic signed [AW:0] pre;
  logic clk = 0;
  int checks = 0, failures = 0, n_neg = 0, n_pos = 0;

  bespoke_neuron #(.N(N), .IW(IW), .AW(AW), .W(codes()), .MASK(masks()),
                   .BIAS({1'b0, 7'(BIAS_SH)})) dut (.a(a), .pre(pre));

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int e = 1 << BIAS_SH;
    for (int i = 0; i < N; i++)
      if (SH[i] >= 0) e += SGN[i] * (int'(a[i]) & int'(MK[i])) * (1 << SH[i]);
    #1;
    checks++;
    if (int'(pre) != e) begin
      failures++;
      $display("mismatch: got %0d exp %0d", pre, e);
    end
    if (e < 0) n_neg++; else n_pos++;
  endtask

  initial begin
    foreach (a[i]) a[i] = '0;
    check();
    foreach (a[i]) a[i] = '1;
    check();
    for (int k = 0; k < 3000; k++) begin
      foreach (a[i]) a[i] = IW'($urandom);
      check();
    end
    checks++;
    if (n_neg == 0 || n_pos == 0) failures++;
    $display("negative=%0d non-negative=%0d", n_neg, n_pos);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

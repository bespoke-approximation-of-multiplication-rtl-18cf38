// tb_approx_argmax: self-checking test of the comparator tree over N = 7
// signed 12-bit values (three stages, odd candidate counts so that byes
// occur). An exact instance (all mask bits set, natural pairing order) must
// return the index of the maximum of distinct values. An approximate
// instance with its own pairing order per stage and a different bit subset
// per comparator is checked against a stage-by-stage integer model of the
// same tree; the test also requires that its result differs from the exact
// argmax at least once.
module tb_approx_argmax;
  import mlp_pkg::*;
  localparam int N = 7;
  localparam int W = 12;
  localparam int NCMP = N - 1;
  localparam int S = 3;
  // pairing order per stage (stage sizes 7, 4, 2)
  localparam int ORD [S][N] = '{'{6, 0, 3, 5, 1, 2, 4}, '{2, 0, 3, 1, 0, 0, 0}, '{1, 0, 0, 0, 0, 0, 0}};
  localparam logic [W-1:0] CM [NCMP] = '{12'hFF0, 12'hF0F, 12'hFFF, 12'h8FC, 12'hE3F, 12'hFC0};

  function automatic logic [MAX_NEURONS*CMP_MASK_W-1:0] cmask();
    logic [MAX_NEURONS*CMP_MASK_W-1:0] v = '0;
    for (int c = 0; c < NCMP; c++) v[c*CMP_MASK_W +: W] = CM[c];
    return v;
  endfunction
  function automatic logic [MAX_STAGES*MAX_NEURONS*ORDER_W-1:0] order();
    logic [MAX_STAGES*MAX_NEURONS*ORDER_W-1:0] v = '0;
    for (int s = 0; s < S; s++)
      for (int p = 0; p < N; p++) v[(s*MAX_NEURONS+p)*ORDER_W +: ORDER_W] = 8'(ORD[s][p]);
    return v;
  endfunction
  function automatic logic [MAX_STAGES*MAX_NEURONS*ORDER_W-1:0] natural();
    logic [MAX_STAGES*MAX_NEURONS*ORDER_W-1:0] v = '0;
    for (int s = 0; s < S; s++)
      for (int p = 0; p < N; p++) v[(s*MAX_NEURONS+p)*ORDER_W +: ORDER_W] = 8'(p);
    return v;
  endfunction

  logic signed [W-1:0] x [N];
  logic [2:0] idx_e, idx_a;
  logic clk = 0;
  int checks = 0, failures = 0, n_diff = 0;

  approx_argmax #(.N(N), .W(W), .CMP_MASK({MAX_NEURONS*CMP_MASK_W{1'b1}}), .ORDER(natural()))
    dut_e (.x(x), .idx(idx_e));
  approx_argmax #(.N(N), .W(W), .CMP_MASK(cmask()), .ORDER(order()))
    dut_a (.x(x), .idx(idx_a));

  always #5 clk = ~clk;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int model();
    int val [N], id [N], sv [N], si [N];
    int c = N, cmp = 0;
    for (int i = 0; i < N; i++) begin val[i] = int'(x[i]); id[i] = i; end
    for (int s = 0; c > 1; s++) begin
      for (int p = 0; p < c; p++) begin sv[p] = val[ORD[s][p]]; si[p] = id[ORD[s][p]]; end
      for (int k = 0; k < c / 2; k++) begin
        int ka = (sv[2*k]   + (1 << (W-1))) & int'(CM[cmp]);
        int kb = (sv[2*k+1] + (1 << (W-1))) & int'(CM[cmp]);
        val[k] = (kb > ka) ? sv[2*k+1] : sv[2*k];
        id[k]  = (kb > ka) ? si[2*k+1] : si[2*k];
        cmp++;
      end
      if (c % 2 == 1) begin val[c/2] = sv[c-1]; id[c/2] = si[c-1]; end
      c = (c + 1) / 2;
    end
    return id[0];
  endfunction

  initial begin
    for (int k = 0; k < 4000; k++) begin
      automatic int best = 0;
      int ea;
      // distinct values: a random base plus a permutation offset
      for (int i = 0; i < N; i++) x[i] = W'($urandom_range(0, 500) * 8 - 2000 + i);
      if (k % 3 == 0) for (int i = 0; i < N; i++) x[i] = W'(int'(x[0]) + ((i * 5) % N) * 3 - 9);
      for (int i = 1; i < N; i++) if (x[i] > x[best]) best = i;
      ea = model();
      #1;
      checks += 2;
      if (int'(idx_e) != best) begin failures++; if (failures < 4) $display("exact: got %0d exp %0d x=%p", idx_e, best, x); end
      if (int'(idx_a) != ea)   begin failures++; $display("approx: got %0d exp %0d", idx_a, ea); end
      if (ea != best) n_diff++;
    end
    checks++;
    if (n_diff == 0) failures++;
    $display("approximate argmax differing from exact: %0d", n_diff);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

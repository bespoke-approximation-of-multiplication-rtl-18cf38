// tb_qrelu: exhaustive self-checking test of the quantized ReLU. A 14-bit
// signed input with SHIFT = 3 is swept over all values; the expected output
// is 0 for negative inputs and min(x >> 3, 255) otherwise. Counts how many
// inputs were nullified, passed and clipped, and requires each case.
module tb_qrelu;
  localparam int XW = 14;
  localparam int SHIFT = 3;

  logic signed [XW-1:0] x;
  logic [7:0] y;
  int checks = 0, failures = 0;
  int n_null = 0, n_pass = 0, n_clip = 0;
  logic clk = 0;

  qrelu #(.XW(XW), .OW(8), .SHIFT(SHIFT)) dut (.x(x), .y(y));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -(1 << (XW-1)); v < (1 << (XW-1)); v++) begin
      int e;
      x = XW'(v);
      if (v < 0) begin e = 0; n_null++; end
      else if ((v >> SHIFT) > 255) begin e = 255; n_clip++; end
      else begin e = v >> SHIFT; n_pass++; end
      #1;
      checks++;
      if (int'(y) != e) begin
        failures++;
        if (failures < 10) $display("x=%0d got %0d exp %0d", v, y, e);
      end
    end
    checks++;
    if (n_null == 0 || n_pass == 0 || n_clip == 0) failures++;
    $display("nullified=%0d passed=%0d clipped=%0d", n_null, n_pass, n_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

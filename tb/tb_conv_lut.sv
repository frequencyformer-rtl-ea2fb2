// tb_conv_lut: strided convolution on LUT multipliers, checked against a
// direct integer convolution. Two configurations: a 8x8x6 map with 4x4
// kernels, stride 4 (the branch-1 shape, scaled) and a 2x2x10 map with 1x1
// kernels. Weights cover the full INT8 range so the signed top chunk of the
// LUT multiplier is exercised. Checks every output, its (y, x, c) position,
// the output count and the OH*OH*OC*KS*KS + 1 cycle latency.
// The stride-equals-kernel convolution follows the paper's branch layers; the
// sizes are reduced for the test.
module tb_conv_lut;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int c1, f1, c2, f2; logic d1, d2;
  conv_lut_check #(.IH(8), .IC(6), .OC(5), .KS(4)) u1 (.clk, .rst_n, .checks(c1), .failures(f1), .fin(d1));
  conv_lut_check #(.IH(2), .IC(10), .OC(7), .KS(1)) u2 (.clk, .rst_n, .checks(c2), .failures(f2), .fin(d2));
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    wait (d1 && d2);
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", c1 + c2, f1 + f2 + 1); $finish; end
endmodule

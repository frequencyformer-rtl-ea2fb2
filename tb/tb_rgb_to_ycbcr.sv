// tb_rgb_to_ycbcr: compares the colour converter with the BT.601 full-range
// formulas evaluated in floating point (tolerance 1 LSB), checks the
// one-cycle latency of out_valid and a few exact corner colours.
// The paper asks only for YCbCr; the BT.601 matrix is this design's choice.
module tb_rgb_to_ycbcr;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [7:0] r, g, b, y, cb, cr;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rgb_to_ycbcr dut (.*);
  function automatic int clip(real v);
    int q = $rtoi(v + 0.5);
    return (q < 0) ? 0 : (q > 255) ? 255 : q;
  endfunction
  task automatic chk(int got, int exp);
    checks++;
    if (got - exp > 1 || exp - got > 1) begin failures++; $display("got %0d exp %0d", got, exp); end
  endtask
  initial begin
    real fr, fg, fb;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      r = 8'($urandom); g = 8'($urandom); b = 8'($urandom);
      if (t == 0) begin r = 0; g = 0; b = 0; end
      if (t == 1) begin r = 255; g = 255; b = 255; end
      in_valid = 1;
      fr = r; fg = g; fb = b;
      @(posedge clk); #1;
      checks++; if (!out_valid) failures++;
      chk(y,  clip(0.299 * fr + 0.587 * fg + 0.114 * fb));
      chk(cb, clip(-0.168736 * fr - 0.331264 * fg + 0.5 * fb + 128.0));
      chk(cr, clip(0.5 * fr - 0.418688 * fg - 0.081312 * fb + 128.0));
      if (t == 0) begin checks++; if (y != 0 || cb != 128 || cr != 128) failures++; end
      if (t == 1) begin checks++; if (y != 255 || cb != 128 || cr != 128) failures++; end
    end
    @(negedge clk) in_valid = 0; @(posedge clk); #1;
    checks++; if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

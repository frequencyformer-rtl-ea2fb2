// tb_dnc_lut_mul: exhaustive check of the D&C LUT multiplier against the
// ordinary product for every 8-bit operand and a set of coefficients.
// The chunked LUT multiplication is the paper's D&C idea; the signed top chunk
// is this design's.
module tb_dnc_lut_mul;
  logic signed [9:0] lut [4];
  logic signed [7:0] x;
  logic signed [19:0] p;
  int checks = 0, failures = 0;
  dnc_lut_mul #(.XW(8), .LW(10), .PW(20)) dut (.lut, .x, .p);
  initial begin
    int cs [8] = '{0, 1, -1, 127, -127, 90, -64, 37};
    foreach (cs[ci]) begin
      lut[0] = 0; lut[1] = 10'(cs[ci]); lut[2] = 10'(2 * cs[ci]); lut[3] = 10'(3 * cs[ci]);
      for (int v = -128; v < 128; v++) begin
        x = 8'(v); #1;
        checks++;
        if (int'(p) != cs[ci] * v) begin failures++; $display("c=%0d x=%0d p=%0d", cs[ci], v, p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

// rgb_to_ycbcr: colour conversion of the incoming RGB pixel stream.
//
// Converts one 8-bit RGB pixel per cycle to full-range YCbCr as used by JPEG
// (ITU-R BT.601 coefficients in 8-bit fixed point, scaled by 256):
//   Y  = ( 77 R + 150 G +  29 B) / 256
//   Cb = (-43 R -  85 G + 128 B) / 256 + 128
//   Cr = (128 R - 107 G -  21 B) / 256 + 128
// with rounding and saturation to 0..255. One register stage: outputs and
// out_valid appear one cycle after in_valid. The tokenizer only states that
// the input is converted to YCbCr following standard practice; the fixed-point
// constants are this design's choice.
module rgb_to_ycbcr (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [7:0] r, g, b,
  output logic       out_valid,
  output logic [7:0] y, cb, cr
);
  function automatic logic [7:0] sat(int v);
    int q;
    q = (v + 128) >>> 8;
    if (q < 0) return 8'd0;
    if (q > 255) return 8'd255;
    return 8'(q);
  endfunction
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y <= '0; cb <= '0; cr <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        y  <= sat(77 * int'(r) + 150 * int'(g) + 29 * int'(b));
        cb <= sat(-43 * int'(r) - 85 * int'(g) + 128 * int'(b) + 32768);
        cr <= sat(128 * int'(r) - 107 * int'(g) - 21 * int'(b) + 32768);
      end
    end
  end
endmodule

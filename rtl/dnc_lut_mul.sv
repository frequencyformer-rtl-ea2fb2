// dnc_lut_mul: divide-and-conquer (D&C) LUT multiplier.
//
// Multiplies a fixed coefficient c by a signed XW-bit data operand x without a
// multiplier array. The coefficient side is a 4-entry sub-LUT holding
// c*{0,1,2,3}; x is cut into XW/2 two-bit chunks, each chunk selects one LUT
// entry, and the partial products are shifted by 2 bits per chunk and added.
// The most significant chunk is taken as signed (00,01,10,11 = 0,1,-2,-1), so
// its entries are read as 0, +L[1], -L[2], -L[1]. Purely combinational.
// The 2-bit sub-problem size and the 4-entry sub-LUT follow the D&C scheme of
// the tokenizer; the signed top chunk is this design's choice.
module dnc_lut_mul #(
  parameter int XW = 8,    // data operand width, even
  parameter int LW = 12,   // sub-LUT entry width (holds 3*c)
  parameter int PW = 20    // product width
) (
  input  logic signed [LW-1:0] lut [4],
  input  logic signed [XW-1:0] x,
  output logic signed [PW-1:0] p
);
  localparam int NCH = XW / 2;
  always_comb begin
    logic [1:0] ch;
    logic signed [PW-1:0] part;
    p = '0;
    for (int j = 0; j < NCH; j++) begin
      ch = x[2*j +: 2];
      if (j == NCH - 1) begin
        unique case (ch)
          2'd0: part = '0;
          2'd1: part = PW'(lut[1]);
          2'd2: part = -PW'(lut[2]);
          default: part = -PW'(lut[1]);
        endcase
      end else begin
        part = PW'(lut[ch]);
      end
      p = p + (part <<< (2 * j));
    end
  end
endmodule

// lut_weight_sram: SRAM-backed D&C LUT store for learned weights.
//
// At deployment each signed 8-bit weight w is written once through the write
// port; the store keeps w and the precomputed 3w, so that every read returns
// the full 4-entry sub-LUT {0, w, 2w, 3w} (2w is a wired shift) that a
// dnc_lut_mul indexes with 2-bit slices of the data operand. One read returns
// P consecutive entries starting at raddr (the layout puts the parallel
// operand dimension innermost). Write is synchronous, read is combinational.
// Storing weights as sub-LUTs in SRAM follows the tokenizer description; the
// 3w precompute at write time and the read width are this design's choices.
module lut_weight_sram #(
  parameter int DEPTH = 64,
  parameter int P     = 4,
  parameter int LW    = 10,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic signed [7:0]    wdata,
  input  logic [AW-1:0]        raddr,
  output logic signed [LW-1:0] lut [P][4]
);
  logic signed [7:0]    w1 [DEPTH];
  logic signed [LW-1:0] w3 [DEPTH];
  always_ff @(posedge clk) begin
    if (we) begin
      w1[waddr] <= wdata;
      w3[waddr] <= LW'(wdata) + (LW'(wdata) <<< 1);
    end
  end
  always_comb begin
    int a;
    for (int p = 0; p < P; p++) begin
      a = int'(raddr) + p;
      if (a >= DEPTH) a = DEPTH - 1;
      lut[p][0] = '0;
      lut[p][1] = LW'(w1[a]);
      lut[p][2] = LW'(w1[a]) <<< 1;
      lut[p][3] = w3[a];
    end
  end
endmodule

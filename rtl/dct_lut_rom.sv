// dct_lut_rom: mask-programmed ROM of the pruned, HAQ-quantised DCT basis.
//
// Holds rows 0..R-1 of the N-point orthonormal DCT basis C[k][i] =
// w_k cos(pi (2i+1) k / 2N). Row k is quantised symmetrically to b_k bits,
// b_k = round(8 - 4k/T) (clamped to 4 for k > T), with a per-row step
// ||C_k||_inf / (2^(b_k-1)-1); the w_k and step factors are left to the
// dequantisation constants downstream. Each stored coefficient is presented as
// a 4-entry D&C sub-LUT {0, c, 2c, 3c}: c and 3c are ROM constants, 2c is a
// wired shift. One row is read per cycle, P consecutive coefficients
// (i = base .. base+P-1) at a time, together with that row's bit width.
// Purely combinational. The row pruning, the bit schedule and the 4-entry
// sub-LUT per coefficient follow the tokenizer description; the per-row
// packing of the table is this design's.
module dct_lut_rom
  import ff_pkg::*;
#(
  parameter int N = 8,
  parameter int R = 5,
  parameter int T = 4,
  parameter int P = 8,
  parameter int LW = 10
) (
  input  logic [$clog2(R)-1:0]   row,
  input  logic [$clog2(N+1)-1:0] base,
  output logic signed [LW-1:0]   lut [P][4],
  output logic [4:0]             bits
);
  logic [N*8-1:0] rom1 [R];
  logic [N*LW-1:0] rom3 [R];
  logic [4:0] rbits [R];

  function automatic logic [N*LW-1:0] triple(logic [IMG*8-1:0] r1);
    logic [N*LW-1:0] t;
    for (int i = 0; i < N; i++) t[LW*i +: LW] = LW'(3 * int'($signed(r1[8*i +: 8])));
    return t;
  endfunction

  for (genvar g = 0; g < R; g++) begin : g_row
    localparam logic [IMG*8-1:0] ROW = dct_row(N, g, haq_bits(g, BMAX, BMIN, T));
    localparam logic [N*LW-1:0] ROW3 = triple(ROW);
    assign rom1[g]  = ROW[N*8-1:0];
    assign rom3[g]  = ROW3;
    assign rbits[g] = 5'(haq_bits(g, BMAX, BMIN, T));
  end

  always_comb begin
    logic signed [7:0] c;
    bits = rbits[row];
    for (int p = 0; p < P; p++) begin
      c = rom1[row][8*(int'(base) + p) +: 8];
      lut[p][0] = '0;
      lut[p][1] = LW'(c);
      lut[p][2] = LW'(c) <<< 1;
      lut[p][3] = rom3[row][LW*(int'(base) + p) +: LW];
    end
  end
endmodule

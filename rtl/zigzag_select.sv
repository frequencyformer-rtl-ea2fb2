// zigzag_select: channel selection by JPEG zigzag order, as pure address routing.
//
// For cell (r, c) of an N x N coefficient grid, returns its zigzag scan
// position idx and sel = (idx < k_lim): the first k_lim positions in zigzag
// order are kept and idx is the channel they are written to. Diagonal d = r+c
// is scanned towards the top-right when d is even and towards the bottom-left
// when d is odd, starting from (0,0) -> (0,1) -> (1,0) -> (2,0). No arithmetic
// touches the coefficient itself. Purely combinational. The zigzag order
// follows the tokenizer (JPEG scan); computing the index arithmetically rather
// than by table is this design's choice.
module zigzag_select #(
  parameter int N  = 8,
  parameter int IW = $clog2(N*N)
) (
  input  logic [$clog2(N)-1:0] r,
  input  logic [$clog2(N)-1:0] c,
  input  logic [IW:0]          k_lim,
  output logic                 sel,
  output logic [IW-1:0]        idx
);
  int d, nprev, first, pos;
  always_comb begin
    first = 0;
    d = int'(r) + int'(c);
    if (d < N) begin
      nprev = d * (d + 1) / 2;
      pos   = (d % 2 == 0) ? int'(c) : int'(r);
    end else begin
      nprev = N * N - (2 * N - 1 - d) * (2 * N - d) / 2;
      first = d - N + 1;
      pos   = (d % 2 == 0) ? (int'(c) - first) : (int'(r) - first);
    end
    idx = IW'(nprev + pos);
    sel = (nprev + pos) < int'(k_lim);
  end
endmodule

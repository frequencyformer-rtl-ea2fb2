// branch_block_check: drives one branch_block configuration with a random
// frame, random conv weights and biases, and compares every output token
// element with a reference built from ff_ref_pkg (pruned DCT per block and
// plane, zigzag selection, strided conv, requantisation). Reports its counts
// on checks/failures and raises fin when finished.
// Selection counts and conv geometry follow the paper; weights, biases and
// shifts are random or chosen by the test.
module branch_block_check #(
  parameter int IMGS = 64, parameter int N = 8, parameter int P = 8,
  parameter int KY = 14, parameter int KC = 5, parameter int T = 4, parameter int KS = 4
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic fin
);
  import ff_ref_pkg::*;
  localparam int OC = 24, G = IMGS / N, CT = KY + 2 * KC, OH = G / KS, WD = OC * KS * KS * CT;
  logic start = 0, busy, done;
  logic [1:0] fb_plane; logic [$clog2(IMGS)-1:0] fb_row, fb_col; logic [7:0] fb_data [P];
  logic w_we = 0, b_we = 0; logic [$clog2(WD)-1:0] w_addr; logic signed [7:0] w_data;
  logic [4:0] b_addr; logic signed [15:0] b_data;
  logic o_valid; logic [$clog2(OH*OH)-1:0] o_tok; logic [4:0] o_c; logic signed [7:0] o_data;
  logic [7:0] frame [3][IMGS][IMGS];
  int w[], bias[], fm[], tab[], x[], y[], outr[];
  branch_block #(.IMGS(IMGS), .N(N), .P(P), .KY(KY), .KC(KC), .T(T), .KS(KS), .OC(OC)) dut (
    .clk, .rst_n, .start, .busy, .done, .fb_plane, .fb_row, .fb_col, .fb_data,
    .w_we, .w_addr, .w_data, .b_we, .b_addr, .b_data, .out_shift(6'd7),
    .o_valid, .o_tok, .o_c, .o_data);
  always_comb for (int p = 0; p < P; p++) fb_data[p] = frame[fb_plane][int'(fb_row) + p][fb_col];

  int rr, ss, kk, off, got, oi, ev;
  longint acc;
  initial begin
    checks = 0; failures = 0; fin = 0;
    w = new[WD]; bias = new[OC]; fm = new[G*G*CT]; x = new[N*N]; outr = new[OH*OH*OC];
    zz_table(N, tab);
    for (int c = 0; c < 3; c++) for (int i = 0; i < IMGS; i++) for (int j = 0; j < IMGS; j++)
      frame[c][i][j] = 8'((i * 3 + j * 5 + c * 40) % 256 + ($urandom % 32));
    @(posedge rst_n);
    for (int a = 0; a < WD; a++) begin
      @(negedge clk); w_we = 1; w_addr = ($clog2(WD))'(a); w_data = 8'($signed($urandom % 15) - 7); w[a] = w_data;
    end
    for (int a = 0; a < OC; a++) begin
      @(negedge clk); w_we = 0; b_we = 1; b_addr = 5'(a); b_data = 16'($signed($urandom % 2001) - 1000); bias[a] = b_data;
    end
    @(negedge clk); b_we = 0;
    // reference
    for (int by = 0; by < G; by++) for (int bx = 0; bx < G; bx++) for (int c = 0; c < 3; c++) begin
      kk = (c == 0) ? KY : KC; off = (c == 0) ? 0 : (c == 1) ? KY : KY + KC;
      rr = 0; ss = 0;
      for (int r = 0; r < N; r++) for (int q = 0; q < N; q++) if (tab[r*N+q] < kk) begin
        if (r + 1 > rr) rr = r + 1; if (q + 1 > ss) ss = q + 1;
      end
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) x[i*N+j] = frame[c][by*N+i][bx*N+j];
      dct_tile(N, T, rr, ss, x, y);
      for (int r = 0; r < rr; r++) for (int q = 0; q < ss; q++)
        if (tab[r*N+q] < kk) fm[(by*G+bx)*CT + off + tab[r*N+q]] = y[r*ss+q];
    end
    for (int oy = 0; oy < OH; oy++) for (int ox = 0; ox < OH; ox++) for (int oc = 0; oc < OC; oc++) begin
      acc = bias[oc];
      for (int ky = 0; ky < KS; ky++) for (int kx = 0; kx < KS; kx++) for (int ic = 0; ic < CT; ic++)
        acc += w[((oc*KS+ky)*KS+kx)*CT+ic] * fm[((oy*KS+ky)*G + ox*KS+kx)*CT + ic];
      outr[(oy*OH+ox)*OC+oc] = rq(acc, 7, 8);
    end
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    got = 0;
    while (!done) begin
      @(posedge clk); #1;
      if (o_valid) begin
        got++; checks++;
        oi = int'(o_tok) * OC + int'(o_c);
        ev = outr[oi];
        if (int'(o_data) != ev) begin
          failures++; $display("N=%0d tok=%0d c=%0d got %0d exp %0d", N, o_tok, o_c, o_data, ev);
        end
      end
    end
    checks++; if (got != OH*OH*OC) failures++;
    fin = 1;
  end
endmodule

// tb_branch_global: global-DCT branch on a 64x64 frame (pooling kernel 8,
// so the pooled grid is 8x8 as at full size). Checks the 24 output channels
// (zigzag 14 of Y, 5 of Cb, 5 of Cr) against a reference: pruned whole-plane
// DCT, per-plane pooling conv over each kept cell, bias and requantisation.
// The pooling kernel, selection and t = 56 follow the paper (pooling read as
// depthwise, this design's choice); the 64x64 size is the test's.
module tb_branch_global;
  import ff_ref_pkg::*;
  localparam int IMGS = 64, P = 8, PK = 8, G = 8, T = 56, WD = 3 * PK * PK;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  always #5 clk = ~clk;
  logic [1:0] fb_plane; logic [5:0] fb_row, fb_col; logic [7:0] fb_data [P];
  logic w_we = 0, b_we = 0; logic [$clog2(WD)-1:0] w_addr; logic signed [7:0] w_data;
  logic [1:0] b_addr; logic signed [15:0] b_data;
  logic o_valid; logic [4:0] o_c; logic signed [7:0] o_data;
  logic [7:0] frame [3][IMGS][IMGS];
  int checks = 0, failures = 0;
  branch_global #(.IMGS(IMGS), .P(P), .PK(PK), .KY(14), .KC(5), .T(T)) dut (
    .clk, .rst_n, .start, .busy, .done, .fb_plane, .fb_row, .fb_col, .fb_data,
    .w_we, .w_addr, .w_data, .b_we, .b_addr, .b_data, .out_shift(6'd9), .o_valid, .o_c, .o_data);
  always_comb for (int p = 0; p < P; p++) fb_data[p] = (int'(fb_row) + p < IMGS) ? frame[fb_plane][int'(fb_row) + p][fb_col] : 8'd0;
  int w[], bias[], tab[], x[], y[], outr[];
  int kk, off, rr, ss, got, ev, z, oi;
  longint acc[];
  initial begin
    w = new[WD]; bias = new[3]; x = new[IMGS*IMGS]; outr = new[24]; acc = new[14];
    zz_table(G, tab);
    for (int c = 0; c < 3; c++) for (int i = 0; i < IMGS; i++) for (int j = 0; j < IMGS; j++)
      frame[c][i][j] = 8'($urandom);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < WD; a++) begin
      @(negedge clk); w_we = 1; w_addr = ($clog2(WD))'(a); w_data = 8'($signed($urandom % 31) - 15); w[a] = w_data;
    end
    for (int a = 0; a < 3; a++) begin
      @(negedge clk); w_we = 0; b_we = 1; b_addr = 2'(a); b_data = 16'($signed($urandom % 20001) - 10000); bias[a] = b_data;
    end
    @(negedge clk); b_we = 0;
    for (int c = 0; c < 3; c++) begin
      kk = (c == 0) ? 14 : 5; off = (c == 0) ? 0 : (c == 1) ? 14 : 19;
      rr = (c == 0) ? 5 * PK : 3 * PK; ss = (c == 0) ? 4 * PK : 2 * PK;
      for (int i = 0; i < IMGS; i++) for (int j = 0; j < IMGS; j++) x[i*IMGS+j] = frame[c][i][j];
      dct_tile(IMGS, T, rr, ss, x, y);
      for (int i = 0; i < 14; i++) acc[i] = 0;
      for (int k = 0; k < rr; k++) for (int v = 0; v < ss; v++) begin
        z = tab[(k / PK) * G + v / PK];
        if (z < kk) acc[z] += w[(c*PK + k % PK)*PK + v % PK] * y[k*ss+v];
      end
      for (int i = 0; i < kk; i++) outr[off + i] = rq(acc[i] + bias[c], 9, 8);
    end
    @(negedge clk) start = 1; @(negedge clk) start = 0;
    got = 0;
    while (!done) begin
      @(posedge clk); #1;
      if (o_valid) begin
        got++; checks++; oi = int'(o_c); ev = outr[oi];
        if (int'(o_data) != ev) begin failures++; $display("c=%0d got %0d exp %0d", o_c, o_data, ev); end
      end
    end
    checks++; if (got != 24) begin failures++; $display("got %0d", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (400000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

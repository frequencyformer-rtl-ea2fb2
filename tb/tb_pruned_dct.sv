// tb_pruned_dct: self-checking test of the pruned HAQ block DCT.
// Feeds random 8x8 blocks (and one flat block) to the engine with 4 lanes, so
// each dot product takes two chunks, and compares every emitted coefficient
// with a reference computed here directly from the cosine basis, the HAQ bit
// schedule and the documented requantisation rules. Also checks the cycle
// count from start to done against r*N*(N/P) + r*s*(N/P) + 1.
// The 5x4 tile, bit schedule and matched precision follow the paper; the
// shifts are this design's.
module tb_pruned_dct;
  localparam int N = 8, P = 4, R = 5, S = 4, T = 4;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic [3:0] x_i0, x_j;
  logic [7:0] x_data [P];
  logic busy, done, y_valid;
  logic [2:0] y_k, y_v;
  logic signed [7:0] y_data;
  logic [7:0] blk [N][N];
  int checks = 0, failures = 0;

  pruned_dct #(.N(N), .P(P), .R_MAX(R), .S_MAX(S), .T(T)) dut (
    .clk, .rst_n, .start, .r_num(3'(R)), .s_num(3'(S)), .busy, .done,
    .x_i0, .x_j, .x_data, .y_valid, .y_k, .y_v, .y_data);
  always_comb for (int p = 0; p < P; p++) x_data[p] = blk[int'(x_i0) + p][x_j];

  function automatic int bsched(int k);
    if (k > T) return 4;
    return $rtoi(8.0 - 4.0 * k / T + 0.5);
  endfunction
  function automatic int coef(int k, int i);
    real mx = 0, c, q;
    for (int ii = 0; ii < N; ii++) begin
      c = $cos(3.141592653589793 * (2*ii+1) * k / (2.0*N)); if (c < 0) c = -c; if (c > mx) mx = c;
    end
    q = $cos(3.141592653589793 * (2*i+1) * k / (2.0*N)) / mx * ((1 << (bsched(k)-1)) - 1);
    return $rtoi(q >= 0 ? q + 0.5 : q - 0.5);
  endfunction
  function automatic int rq(longint v, int sh, int b);
    longint r = (sh == 0) ? v : ((v + (longint'(1) << (sh-1))) >>> sh);
    longint hi = (longint'(1) << (b-1)) - 1, lo = -(longint'(1) << (b-1));
    if (r > hi) r = hi; if (r < lo) r = lo;
    return int'(r);
  endfunction
  int ref_y [R][S];
  task automatic reference();
    int ib [R][N]; longint acc; int bk, bv, m, xv;
    for (int k = 0; k < R; k++) begin
      bk = bsched(k);
      for (int j = 0; j < N; j++) begin
        acc = 0;
        for (int i = 0; i < N; i++) begin xv = (int'(blk[i][j]) - 128) >>> (8 - bk); acc += coef(k, i) * xv; end
        ib[k][j] = rq(acc, bk - 1 + 3, bk);
      end
    end
    for (int k = 0; k < R; k++) for (int v = 0; v < S; v++) begin
      bk = bsched(k); bv = bsched(v); m = (bk < bv) ? bk : bv; acc = 0;
      for (int j = 0; j < N; j++) acc += (ib[k][j] >>> (bk - m)) * coef(v, j);
      ref_y[k][v] = rq(acc, (m-1) + (bv-1) + 3 - 7, 8);
    end
  endtask

  int got, cyc;
  task automatic run_block();
    reference();
    got = 0; cyc = 0;
    @(negedge clk) start = 1; @(negedge clk) start = 0; cyc = 1;
    while (!done) begin
      @(posedge clk); #1;
      if (y_valid) begin
        checks++; got++;
        if (int'(y_data) != ref_y[y_k][y_v]) begin
          failures++; $display("MISMATCH k=%0d v=%0d got %0d exp %0d", y_k, y_v, y_data, ref_y[y_k][y_v]);
        end
      end
      cyc++;
    end
    checks++; if (got != R*S) begin failures++; $display("count %0d", got); end
    checks++; if (cyc != R*N*(N/P) + R*S*(N/P) + 1) begin failures++; $display("cycles %0d", cyc); end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) blk[i][j] = 8'd200;
    run_block();
    checks++; if (ref_y[0][0] <= 0) failures++;  // flat bright block: positive DC
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) blk[i][j] = 8'($urandom);
      run_block();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_zigzag_select: walks the JPEG zigzag path independently (direction
// changes at the grid edges) for 8x8 and 32x32 grids and checks that every
// cell gets its scan position; also checks the selection mask for K = 14
// (5 rows x 4 columns used) on the 8x8 grid.
// The JPEG zigzag order is the paper's selection rule.
module tb_zigzag_select;
  logic [2:0] r8, c8; logic [6:0] k8; logic s8; logic [5:0] i8;
  logic [4:0] r32, c32; logic [10:0] k32; logic s32; logic [9:0] i32;
  int checks = 0, failures = 0;
  zigzag_select #(.N(8))  d8  (.r(r8), .c(c8), .k_lim(k8), .sel(s8), .idx(i8));
  zigzag_select #(.N(32)) d32 (.r(r32), .c(c32), .k_lim(k32), .sel(s32), .idx(i32));
  task automatic walk(int n);
    int r = 0, c = 0, up = 1;
    for (int idx = 0; idx < n * n; idx++) begin
      if (n == 8) begin r8 = 3'(r); c8 = 3'(c); k8 = 7'd64; end
      else begin r32 = 5'(r); c32 = 5'(c); k32 = 11'd1024; end
      #1; checks++;
      if ((n == 8 ? int'(i8) : int'(i32)) != idx) begin failures++; $display("n=%0d (%0d,%0d) exp %0d", n, r, c, idx); end
      // next cell of the zigzag path
      if (up) begin
        if (c == n - 1) begin r++; up = 0; end
        else if (r == 0) begin c++; up = 0; end
        else begin r--; c++; end
      end else begin
        if (r == n - 1) begin c++; up = 1; end
        else if (c == 0) begin r++; up = 1; end
        else begin r++; c--; end
      end
    end
  endtask
  initial begin
    int maxr, maxc, cnt;
    walk(8); walk(32);
    maxr = 0; maxc = 0; cnt = 0; k8 = 7'd14;
    for (int r = 0; r < 8; r++) for (int c = 0; c < 8; c++) begin
      r8 = 3'(r); c8 = 3'(c); #1;
      if (s8) begin cnt++; if (r + 1 > maxr) maxr = r + 1; if (c + 1 > maxc) maxc = c + 1; end
    end
    checks++; if (cnt != 14 || maxr != 5 || maxc != 4) begin failures++; $display("K=14: %0d %0d %0d", cnt, maxr, maxc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

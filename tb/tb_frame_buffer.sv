// tb_frame_buffer: writes a random 32x32 YCbCr frame in raster order (with
// wr_valid gaps), checks that frame_full rises after exactly IMG*IMG accepted
// pixels, that further writes are ignored, and that all three read ports
// return P consecutive rows of the addressed column and plane, with zeros past
// the bottom edge. A second frame after frame_start is checked the same way.
// The frame store organisation tested is this design's choice.
module tb_frame_buffer;
  localparam int IMG = 32, P1 = 8, P2 = 4, P3 = 16, AW = $clog2(IMG);
  logic clk = 0, rst_n = 0, frame_start = 0, wr_valid = 0, frame_full;
  logic [7:0] wr_y, wr_cb, wr_cr;
  logic [1:0] p1, p2, p3; logic [AW-1:0] r1, c1, r2, c2, r3, c3;
  logic [7:0] d1 [P1]; logic [7:0] d2 [P2]; logic [7:0] d3 [P3];
  logic [7:0] ref_m [3][IMG][IMG];
  int checks = 0, failures = 0, n, e;
  always #5 clk = ~clk;
  frame_buffer #(.IMG(IMG), .P1(P1), .P2(P2), .P3(P3)) dut (.clk, .rst_n, .frame_start, .wr_valid,
    .wr_y, .wr_cb, .wr_cr, .frame_full, .rd1_plane(p1), .rd1_row(r1), .rd1_col(c1), .rd1_data(d1),
    .rd2_plane(p2), .rd2_row(r2), .rd2_col(c2), .rd2_data(d2), .rd3_plane(p3), .rd3_row(r3), .rd3_col(c3), .rd3_data(d3));
  function automatic int rv(int pl, int r, int c);
    return (r < IMG) ? int'(ref_m[pl][r][c]) : 0;
  endfunction
  task automatic chk(int got, int exp);
    checks++; if (got != exp) begin failures++; if (failures < 10) $display("got %0d exp %0d", got, exp); end
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 2; f++) begin
      @(negedge clk) frame_start = 1; @(negedge clk) frame_start = 0;
      n = 0;
      while (n < IMG * IMG) begin
        @(negedge clk);
        chk(int'(frame_full), 0);
        wr_valid = ($urandom % 4) != 0;
        wr_y = 8'($urandom); wr_cb = 8'($urandom); wr_cr = 8'($urandom);
        if (wr_valid) begin
          ref_m[0][n / IMG][n % IMG] = wr_y; ref_m[1][n / IMG][n % IMG] = wr_cb; ref_m[2][n / IMG][n % IMG] = wr_cr;
          n++;
        end
      end
      @(negedge clk); chk(int'(frame_full), 1);
      // writes after full must be ignored
      wr_valid = 1; wr_y = 8'hFF; wr_cb = 8'hFF; wr_cr = 8'hFF;
      @(negedge clk); wr_valid = 0; chk(int'(frame_full), 1);
      for (int t = 0; t < 400; t++) begin
        p1 = 2'($urandom % 3); r1 = AW'($urandom); c1 = AW'($urandom);
        p2 = 2'($urandom % 3); r2 = AW'($urandom); c2 = AW'($urandom);
        p3 = 2'($urandom % 3); r3 = AW'($urandom); c3 = AW'($urandom);
        #1;
        for (int p = 0; p < P1; p++) chk(int'(d1[p]), rv(p1, int'(r1) + p, c1));
        for (int p = 0; p < P2; p++) chk(int'(d2[p]), rv(p2, int'(r2) + p, c2));
        for (int p = 0; p < P3; p++) chk(int'(d3[p]), rv(p3, int'(r3) + p, c3));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

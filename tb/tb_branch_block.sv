// tb_branch_block: runs the block-DCT branch in the branch 1 shape (8x8
// blocks, zigzag 14/5/5, conv k=4 s=4) and the branch 2 shape (32x32 blocks,
// zigzag 96/24/24, conv k=1) on a 64x64 frame and checks every token element
// against the reference.
// The block sizes, zigzag counts and conv shapes checked are the paper's; the
// reduced 64x64 frame and the shift values are the test's own.
module tb_branch_block;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int c1, f1, c2, f2; logic fin1, fin2;
  int checks = 0, failures = 0;
  branch_block_check #(.IMGS(64), .N(8),  .P(4), .KY(14), .KC(5),  .T(4),  .KS(4)) u1 (.clk, .rst_n, .checks(c1), .failures(f1), .fin(fin1));
  branch_block_check #(.IMGS(64), .N(32), .P(8), .KY(96), .KC(24), .T(12), .KS(1)) u2 (.clk, .rst_n, .checks(c2), .failures(f2), .fin(fin2));
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    wait (fin1 && fin2);
    checks = c1 + c2; failures = f1 + f2;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    checks = c1 + c2; failures = f1 + f2 + 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

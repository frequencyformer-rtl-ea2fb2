// tb_lut_weight_sram: writes random weights and checks that every read port
// returns the sub-LUT {0, w, 2w, 3w} of the addressed weights.
// Sub-LUT storage follows the paper's D&C LUTs; storing 3w is this design's.
module tb_lut_weight_sram;
  localparam int DEPTH = 64, P = 4;
  logic clk = 0, we = 0;
  logic [5:0] waddr, raddr;
  logic signed [7:0] wdata;
  logic signed [9:0] lut [P][4];
  int checks = 0, failures = 0;
  int mem [DEPTH];
  always #5 clk = ~clk;
  lut_weight_sram #(.DEPTH(DEPTH), .P(P), .LW(10)) dut (.*);
  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = 8'($urandom); mem[a] = int'(wdata);
    end
    @(negedge clk); we = 0;
    for (int a = 0; a <= DEPTH - P; a++) begin
      raddr = 6'(a); #1;
      for (int p = 0; p < P; p++) for (int e = 0; e < 4; e++) begin
        checks++;
        if (int'(lut[p][e]) != e * mem[a + p]) begin failures++; $display("a=%0d p=%0d e=%0d", a, p, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

// tb_softmax_unit: random score rows through the softmax unit, compared with
// the reference fixed-point softmax and with the real-valued softmax
// (probabilities within 3/256 and summing to about 256); checks the 3*NK+2
// cycle latency.
// The paper's unit is FP16; this test checks the design's fixed-point version.
module tb_softmax_unit;
  import ff_ref_pkg::*;
  localparam int NK = 9;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic signed [31:0] scores [NK];
  logic [15:0] scale_mul;
  logic [7:0] probs [NK];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  softmax_unit #(.NK(NK)) dut (.*);
  initial begin
    longint sc[]; int p[]; int cyc, tot; real ex[], es;
    repeat (2) @(posedge clk); rst_n = 1;
    sc = new[NK]; ex = new[NK];
    for (int t = 0; t < 50; t++) begin
      scale_mul = 16'(256 + $urandom % 512);
      foreach (scores[j]) begin scores[j] = 32'($signed($urandom % 4001) - 2000); sc[j] = scores[j]; end
      softmax(sc, int'(scale_mul), p);
      @(negedge clk) start = 1; @(negedge clk) start = 0; cyc = 1;
      while (!done) begin @(posedge clk); #1; cyc++; end
      checks++; if (cyc != 3 * NK + 2) begin failures++; $display("latency %0d", cyc); end
      es = 0; foreach (sc[j]) begin ex[j] = $pow(2.0, real'(sc[j]) * real'(scale_mul) / 65536.0); es += ex[j]; end
      tot = 0;
      foreach (probs[j]) begin
        checks++; if (int'(probs[j]) != p[j]) begin failures++; $display("j=%0d got %0d exp %0d", j, probs[j], p[j]); end
        checks++; if (real'(probs[j]) - 256.0 * ex[j] / es > 3.0 || 256.0 * ex[j] / es - real'(probs[j]) > 3.0) begin failures++; $display("real j=%0d %0d vs %f", j, probs[j], 256.0*ex[j]/es); end
        tot += probs[j];
      end
      checks++; if (tot < 256 - NK - 2 || tot > 257) begin failures++; $display("sum %0d", tot); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

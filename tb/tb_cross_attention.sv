// tb_cross_attention: programs random Q/K/V projection weights, runs random
// query and key/value tokens through a small cross-attention stage (NQ=4,
// NK=3, D=8) and compares every output with the reference attention; then
// a second case with a single key (as in the second fusion stage), where the
// softmax is exactly 1 and the output is T_q + T_kv W_V.
// Eq.-level attention follows the paper; the residual, single head and
// fixed-point softmax are this design's choices and are modelled as such.
module tb_cross_attention;
  import ff_ref_pkg::*;
  localparam int NQ = 4, NK = 3, D = 8;
  logic clk = 0, rst_n = 0, start = 0, w_we = 0, busy, done, busy1, done1, start1 = 0;
  logic [1:0] w_sel; logic [5:0] w_addr; logic signed [7:0] w_data;
  logic [5:0] proj_shift = 6'd6, out_shift = 6'd8; logic [15:0] scale_mul = 16'd300;
  logic signed [7:0] tq [NQ][D]; logic signed [7:0] tkv [NK][D]; logic signed [7:0] tout [NQ][D];
  logic signed [7:0] tkv1 [1][D]; logic signed [7:0] tout1 [NQ][D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  cross_attention #(.NQ(NQ), .NK(NK), .D(D)) dut (.clk, .rst_n, .w_we, .w_sel, .w_addr, .w_data,
    .proj_shift, .out_shift, .scale_mul, .start, .tq, .tkv, .busy, .done, .tout);
  cross_attention #(.NQ(NQ), .NK(1), .D(D)) dut1 (.clk, .rst_n, .w_we, .w_sel, .w_addr, .w_data,
    .proj_shift, .out_shift, .scale_mul, .start(start1), .tq, .tkv(tkv1), .busy(busy1), .done(done1), .tout(tout1));
  int wq[], wk[], wv[], fq[], fkv[], fkv1[], ref_o[], ref_1[];
  initial begin
    wq = new[D*D]; wk = new[D*D]; wv = new[D*D]; fq = new[NQ*D]; fkv = new[NK*D]; fkv1 = new[D];
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 3; s++) for (int a = 0; a < D*D; a++) begin
      @(negedge clk); w_we = 1; w_sel = 2'(s); w_addr = 6'(a); w_data = 8'($signed($urandom % 101) - 50);
      if (s == 0) wq[a] = w_data; else if (s == 1) wk[a] = w_data; else wv[a] = w_data;
    end
    @(negedge clk); w_we = 0;
    for (int t = 0; t < 4; t++) begin
      for (int n = 0; n < NQ; n++) for (int d = 0; d < D; d++) begin tq[n][d] = 8'($urandom); fq[n*D+d] = tq[n][d]; end
      for (int m = 0; m < NK; m++) for (int d = 0; d < D; d++) begin tkv[m][d] = 8'($urandom); fkv[m*D+d] = tkv[m][d]; end
      for (int d = 0; d < D; d++) begin tkv1[0][d] = 8'($urandom); fkv1[d] = tkv1[0][d]; end
      xattn(NQ, NK, D, fq, fkv, wq, wk, wv, 6, 8, 300, ref_o);
      xattn(NQ, 1, D, fq, fkv1, wq, wk, wv, 6, 8, 300, ref_1);
      @(negedge clk) begin start = 1; start1 = 1; end
      @(negedge clk) begin start = 0; start1 = 0; end
      wait (!busy && !busy1); @(posedge clk); #1;
      for (int n = 0; n < NQ; n++) for (int d = 0; d < D; d++) begin
        checks += 2;
        if (int'(tout[n][d]) != ref_o[n*D+d]) begin failures++; $display("n=%0d d=%0d got %0d exp %0d", n, d, tout[n][d], ref_o[n*D+d]); end
        if (int'(tout1[n][d]) != ref_1[n*D+d]) begin failures++; $display("1key n=%0d d=%0d got %0d exp %0d", n, d, tout1[n][d], ref_1[n*D+d]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

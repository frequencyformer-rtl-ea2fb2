// conv_lut_check: drives one conv_lut configuration with random weights,
// biases and feature map, and compares each streamed output with
// round-half-up(sum + bias) >> shift, saturated to INT8.
// The reference is a plain integer convolution with this design's requantiser.
module conv_lut_check #(parameter int IH = 8, parameter int IC = 6, parameter int OC = 5, parameter int KS = 4) (
  input logic clk, input logic rst_n, output int checks, output int failures, output logic fin);
  import ff_ref_pkg::*;
  localparam int OH = IH / KS, WD = OC * KS * KS * IC, WA = $clog2(WD), SH = 7;
  logic w_we = 0, b_we = 0, start = 0, busy, done, o_valid;
  logic [WA-1:0] w_addr; logic signed [7:0] w_data;
  logic [$clog2(OC)-1:0] b_addr, o_c; logic signed [15:0] b_data;
  logic [$clog2(IH)-1:0] fm_y, fm_x; logic signed [7:0] fm_data [IC];
  logic [$clog2(OH+1)-1:0] o_y, o_x; logic signed [7:0] o_data;
  int w[WD], bias[OC], fm[IH][IH][IC];
  int got, cyc, oi, ev; longint acc;
  conv_lut #(.IH(IH), .IC(IC), .OC(OC), .KS(KS)) dut (.clk, .rst_n, .w_we, .w_addr, .w_data, .b_we, .b_addr, .b_data,
    .out_shift(6'(SH)), .start, .busy, .done, .fm_y, .fm_x, .fm_data, .o_valid, .o_y, .o_x, .o_c, .o_data);
  always_comb for (int i = 0; i < IC; i++) fm_data[i] = 8'(fm[fm_y][fm_x][i]);
  initial begin
    checks = 0; failures = 0; fin = 0;
    for (int y = 0; y < IH; y++) for (int x = 0; x < IH; x++) for (int i = 0; i < IC; i++) fm[y][x][i] = int'($urandom % 256) - 128;
    @(posedge rst_n);
    for (int a = 0; a < WD; a++) begin
      @(negedge clk); w_we = 1; w_addr = WA'(a); w[a] = int'($urandom % 256) - 128; w_data = 8'(w[a]);
    end
    for (int a = 0; a < OC; a++) begin
      @(negedge clk); w_we = 0; b_we = 1; b_addr = ($clog2(OC))'(a); bias[a] = int'($urandom % 20001) - 10000; b_data = 16'(bias[a]);
    end
    @(negedge clk); b_we = 0; start = 1; @(negedge clk); start = 0;
    got = 0; cyc = 1;
    while (!done) begin
      @(posedge clk); #1; cyc++;
      if (o_valid) begin
        oi = int'(o_c);
        acc = bias[oi];
        for (int a = 0; a < KS; a++) for (int b = 0; b < KS; b++) for (int i = 0; i < IC; i++)
          acc += w[((oi*KS+a)*KS+b)*IC+i] * fm[int'(o_y)*KS+a][int'(o_x)*KS+b][i];
        ev = rq(acc, SH, 8);
        checks++;
        if (int'(o_data) != ev) begin failures++; $display("conv y%0d x%0d c%0d got %0d exp %0d", o_y, o_x, o_c, o_data, ev); end
        checks++;
        if (got != ((int'(o_y) * OH + int'(o_x)) * OC + oi)) begin failures++; $display("order %0d", got); end
        got++;
      end
    end
    checks++; if (got != OH*OH*OC) begin failures++; $display("count %0d", got); end
    checks++; if (cyc != OH*OH*OC*KS*KS + 1) begin failures++; $display("cycles %0d exp %0d", cyc, OH*OH*OC*KS*KS + 1); end
    fin = 1;
  end
endmodule

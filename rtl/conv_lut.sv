// conv_lut: BN-folded strided Conv2d on D&C LUT multipliers.
//
// Convolves an IH x IH x IC INT8 feature map with OC kernels of KS x KS x IC
// (stride KS, no padding, so the output is OH x OH x OC with OH = IH/KS).
// Batch normalisation is folded into the weights and a per-channel bias at
// deployment. The IC input channels of one kernel tap are multiplied in
// parallel by IC LUT multipliers whose sub-LUTs come from lut_weight_sram, so
// one output takes KS*KS cycles. The finished sum plus bias is requantised
// to INT8 by a rounding right shift of out_shift bits ("Q" after the conv).
// Interface: weights at address ((oc*KS+ky)*KS+kx)*IC+ic through w_*, biases
// through b_*; pulse start; the map is read through fm_y/fm_x (all IC
// channels of one pixel on fm_data, same cycle); results stream out on
// o_valid with o_y, o_x, o_c in (oy, ox, oc) order; done pulses after the last.
// Timing: OH*OH*OC*KS*KS + 1 cycles from start to done.
// Strided conv with folded BN on SRAM-backed LUTs follows the tokenizer; the
// loop order, lane count and requantisation by shift are this design's.
module conv_lut #(
  parameter int IH = 28,
  parameter int IC = 24,
  parameter int OC = 24,
  parameter int KS = 4,
  parameter int OH = IH / KS,
  parameter int WD = OC * KS * KS * IC,
  parameter int WA = $clog2(WD)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic w_we,
  input  logic [WA-1:0] w_addr,
  input  logic signed [7:0] w_data,
  input  logic b_we,
  input  logic [$clog2(OC)-1:0] b_addr,
  input  logic signed [15:0] b_data,
  input  logic [5:0] out_shift,
  input  logic start,
  output logic busy,
  output logic done,
  output logic [$clog2(IH)-1:0] fm_y,
  output logic [$clog2(IH)-1:0] fm_x,
  input  logic signed [7:0] fm_data [IC],
  output logic o_valid,
  output logic [$clog2(OH+1)-1:0] o_y,
  output logic [$clog2(OH+1)-1:0] o_x,
  output logic [$clog2(OC)-1:0] o_c,
  output logic signed [7:0] o_data
);
  localparam int LW = 10, PW = 20, AW = 32;
  localparam int KW = (KS > 1) ? $clog2(KS) : 1;
  logic [$clog2(OH+1)-1:0] oy, ox;
  logic [$clog2(OC)-1:0] oc;
  logic [KW-1:0] ky, kx;
  logic signed [AW-1:0] acc;
  logic signed [15:0] bias [OC];

  always_ff @(posedge clk) if (b_we) bias[b_addr] <= b_data;

  logic [WA-1:0] raddr;
  assign raddr = WA'(((int'(oc) * KS + int'(ky)) * KS + int'(kx)) * IC);
  logic signed [LW-1:0] lut [IC][4];
  lut_weight_sram #(.DEPTH(WD), .P(IC), .LW(LW)) u_w (
    .clk, .we(w_we), .waddr(w_addr), .wdata(w_data), .raddr(raddr), .lut(lut));

  logic signed [PW-1:0] prod [IC];
  for (genvar g = 0; g < IC; g++) begin : g_lane
    dnc_lut_mul #(.XW(8), .LW(LW), .PW(PW)) u_mul (.lut(lut[g]), .x(fm_data[g]), .p(prod[g]));
  end
  logic signed [AW-1:0] total, with_bias;
  always_comb begin
    total = acc;
    for (int i = 0; i < IC; i++) total = total + AW'(prod[i]);
    with_bias = total + AW'(bias[oc]);
  end
  logic signed [7:0] rq;
  haq_requant #(.IW(AW), .OW(8)) u_rq (.din(with_bias), .shift(out_shift), .bits(5'd8), .dout(rq));

  assign fm_y = $clog2(IH)'(int'(oy) * KS + int'(ky));
  assign fm_x = $clog2(IH)'(int'(ox) * KS + int'(kx));

  logic last_tap;
  assign last_tap = (int'(ky) == KS - 1) && (int'(kx) == KS - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; o_valid <= 1'b0;
      oy <= '0; ox <= '0; oc <= '0; ky <= '0; kx <= '0; acc <= '0;
      o_y <= '0; o_x <= '0; o_c <= '0; o_data <= '0;
    end else begin
      done <= 1'b0; o_valid <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; oy <= '0; ox <= '0; oc <= '0; ky <= '0; kx <= '0; acc <= '0;
        end
      end else if (!last_tap) begin
        acc <= total;
        if (int'(kx) == KS - 1) begin kx <= '0; ky <= ky + 1'b1; end
        else kx <= kx + 1'b1;
      end else begin
        acc <= '0; ky <= '0; kx <= '0;
        o_valid <= 1'b1; o_y <= oy; o_x <= ox; o_c <= oc; o_data <= rq;
        if (int'(oc) == OC - 1) begin
          oc <= '0;
          if (int'(ox) == OH - 1) begin
            ox <= '0;
            if (int'(oy) == OH - 1) begin busy <= 1'b0; done <= 1'b1; end
            else oy <= oy + 1'b1;
          end else ox <= ox + 1'b1;
        end else oc <= oc + 1'b1;
      end
    end
  end
endmodule

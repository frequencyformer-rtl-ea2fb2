// branch_global: global (full-image) DCT branch of the tokenizer (branch 3).
//
// Applies the 2-D DCT to the whole IMGS x IMGS plane, then a PK x PK, stride
// PK convolution (learned pooling, one kernel per plane, BN folded) that turns
// the coefficient map into a G x G x 3 grid (G = IMGS/PK = 8), then keeps the
// first KY (Y) and KC (Cb, Cr) pooled cells in zigzag order: one token of
// KY+2KC = 24 channels. Because the selection is fixed, only the pooled cells
// that survive it are computed: the pruned DCT produces the top-left
// (rows x cols) = (5*28 x 4*28) coefficient tile for Y and (3*28 x 2*28) for Cb
// and Cr, and every coefficient is multiplied (one D&C LUT multiplier) by its
// kernel weight and accumulated into its pooled cell as it streams out of the
// DCT engine. After each plane the kept cells are biased, requantised to INT8
// (shift out_shift) and streamed out on o_valid with channel o_c.
// Weight address: (plane*PK + ky)*PK + kx; bias address: plane.
// The DCT, the k=28 s=28 conv, the zigzag selection after it and the HAQ
// transition t=56 follow the tokenizer. One kernel per plane (depthwise) is
// this design's reading of "reducing the spatial extent to H/28 x W/28 x 3".
// Timing per plane: r*IMGS*(IMGS/P) + r*s*(IMGS/P) + 1 DCT cycles, then K+1
// output cycles.
module branch_global
  import ff_pkg::*;
#(
  parameter int IMGS = 224,
  parameter int P  = 28,
  parameter int PK = 28,
  parameter int KY = 14,
  parameter int KC = 5,
  parameter int T  = 56,
  parameter int G  = IMGS / PK,
  parameter int RY = zz_rows(G, KY) * PK,
  parameter int SY = zz_cols(G, KY) * PK,
  parameter int RC = zz_rows(G, KC) * PK,
  parameter int SC = zz_cols(G, KC) * PK,
  parameter int WD = 3 * PK * PK,
  parameter int WA = $clog2(WD)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic busy,
  output logic done,
  output logic [1:0] fb_plane,
  output logic [$clog2(IMGS)-1:0] fb_row,
  output logic [$clog2(IMGS)-1:0] fb_col,
  input  logic [7:0] fb_data [P],
  input  logic w_we, input logic [WA-1:0] w_addr, input logic signed [7:0] w_data,
  input  logic b_we, input logic [1:0] b_addr, input logic signed [15:0] b_data,
  input  logic [5:0] out_shift,
  output logic o_valid,
  output logic [$clog2(KY+2*KC)-1:0] o_c,
  output logic signed [7:0] o_data
);
  typedef enum logic [2:0] {G_IDLE, G_START, G_DCT, G_EMIT, G_NEXT} gstate_t;
  gstate_t st;
  logic [1:0] ch;
  localparam int ZW = $clog2(G*G);
  logic [ZW:0] ez;
  logic signed [31:0] acc [KY];
  logic signed [15:0] bias [3];
  always_ff @(posedge clk) if (b_we) bias[b_addr] <= b_data;

  logic d_start, d_busy, d_done, y_valid;
  logic [$clog2(IMGS+1)-1:0] x_i0, x_j;
  logic [$clog2((RY > SY) ? RY : SY)-1:0] y_k, y_v;
  logic signed [7:0] y_data;
  logic [$clog2(RY+1)-1:0] rnum;
  logic [$clog2(SY+1)-1:0] snum;
  assign rnum = (ch == 2'd0) ? ($clog2(RY+1))'(RY) : ($clog2(RY+1))'(RC);
  assign snum = (ch == 2'd0) ? ($clog2(SY+1))'(SY) : ($clog2(SY+1))'(SC);
  pruned_dct #(.N(IMGS), .P(P), .R_MAX(RY), .S_MAX(SY), .T(T)) u_dct (
    .clk, .rst_n, .start(d_start), .r_num(rnum), .s_num(snum), .busy(d_busy), .done(d_done),
    .x_i0, .x_j, .x_data(fb_data), .y_valid, .y_k, .y_v, .y_data);
  assign fb_plane = ch;
  assign fb_row = $clog2(IMGS)'(x_i0);
  assign fb_col = $clog2(IMGS)'(x_j);

  // pooled-cell selection
  logic zsel;
  logic [ZW-1:0] zidx;
  logic [ZW:0] klim;
  assign klim = (ch == 2'd0) ? (ZW+1)'(KY) : (ZW+1)'(KC);
  zigzag_select #(.N(G), .IW(ZW)) u_zz (
    .r($clog2(G)'(int'(y_k) / PK)), .c($clog2(G)'(int'(y_v) / PK)), .k_lim(klim), .sel(zsel), .idx(zidx));

  // pooling-conv weight lookup and LUT multiply
  logic [WA-1:0] raddr;
  assign raddr = WA'((int'(ch) * PK + int'(y_k) % PK) * PK + int'(y_v) % PK);
  logic signed [9:0] lut [1][4];
  lut_weight_sram #(.DEPTH(WD), .P(1), .LW(10)) u_w (
    .clk, .we(w_we), .waddr(w_addr), .wdata(w_data), .raddr(raddr), .lut(lut));
  logic signed [19:0] prod;
  dnc_lut_mul #(.XW(8), .LW(10), .PW(20)) u_mul (.lut(lut[0]), .x(y_data), .p(prod));

  // output requantisation
  logic signed [31:0] biased;
  logic signed [7:0] rq;
  assign biased = acc[ez[$clog2(KY)-1:0]] + 32'(bias[ch]);
  haq_requant #(.IW(32), .OW(8)) u_rq (.din(biased), .shift(out_shift), .bits(5'd8), .dout(rq));

  assign d_start = (st == G_START);
  assign busy = (st != G_IDLE);
  int choff;
  assign choff = (ch == 2'd0) ? 0 : (ch == 2'd1) ? KY : KY + KC;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; ch <= '0; ez <= '0; done <= 1'b0; o_valid <= 1'b0; o_c <= '0; o_data <= '0;
      for (int i = 0; i < KY; i++) acc[i] <= '0;
    end else begin
      done <= 1'b0; o_valid <= 1'b0;
      unique case (st)
        G_IDLE: if (start) begin st <= G_START; ch <= '0; end
        G_START: begin
          st <= G_DCT; ez <= '0;
          for (int i = 0; i < KY; i++) acc[i] <= '0;
        end
        G_DCT: begin
          if (y_valid && zsel) acc[zidx[$clog2(KY)-1:0]] <= acc[zidx[$clog2(KY)-1:0]] + 32'(prod);
          if (d_done) st <= G_EMIT;
        end
        G_EMIT: begin
          o_valid <= 1'b1;
          o_c <= $clog2(KY+2*KC)'(choff + int'(ez));
          o_data <= rq;
          ez <= ez + 1'b1;
          if (int'(ez) == int'(klim) - 1) st <= G_NEXT;
        end
        G_NEXT: begin
          if (ch == 2'd2) begin st <= G_IDLE; done <= 1'b1; end
          else begin ch <= ch + 1'b1; st <= G_START; end
        end
        default: st <= G_IDLE;
      endcase
    end
  end
  logic unused;
  assign unused = d_busy ^ (^zidx); // zidx is wider than the 14 kept cells need
endmodule

// branch_block: one block-wise DCT branch of the tokenizer (branch 1 or 2).
//
// Tiles each colour plane into N x N blocks (G x G blocks, G = IMG/N). For
// every block and plane it runs pruned_dct on the r x s tile that contains the
// first K zigzag coefficients (KY for Y, KC for Cb and Cr), routes the kept
// coefficients by zigzag_select into a G x G x (KY+2KC) INT8 feature map
// (channels: Y zigzag 0..KY-1, then Cb, then Cr), and finally runs conv_lut
// (kernel and stride KS, OC outputs) over that map. Output tokens stream out
// on o_valid with token index o_tok = oy*OH+ox and channel o_c.
// Branch 1 is N=8, KY=14, KC=5, KS=4 (28x28x24 -> 7x7x24); branch 2 is N=32,
// KY=96, KC=24, KS=1 (7x7x144 -> 7x7x24). These shapes follow the tokenizer;
// the block-by-block sequencing is this design's choice.
// Timing: G*G*(sum over planes of r*N*(N/P) + r*s*(N/P) + 2) cycles of DCT,
// then OH*OH*OC*KS*KS + 1 cycles of conv.
module branch_block
  import ff_pkg::*;
#(
  parameter int IMGS = 224,
  parameter int N  = 8,
  parameter int P  = 8,
  parameter int KY = 14,
  parameter int KC = 5,
  parameter int T  = 4,
  parameter int KS = 4,
  parameter int OC = 24,
  parameter int RY = zz_rows(N, KY),
  parameter int RC = zz_rows(N, KC),
  parameter int SY = zz_cols(N, KY),
  parameter int SC = zz_cols(N, KC),
  parameter int G  = IMGS / N,
  parameter int CT = KY + 2 * KC,
  parameter int OH = G / KS,
  parameter int WD = OC * KS * KS * CT,
  parameter int WA = $clog2(WD)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic busy,
  output logic done,
  // frame read
  output logic [1:0] fb_plane,
  output logic [$clog2(IMGS)-1:0] fb_row,
  output logic [$clog2(IMGS)-1:0] fb_col,
  input  logic [7:0] fb_data [P],
  // conv weight / bias programming
  input  logic w_we, input logic [WA-1:0] w_addr, input logic signed [7:0] w_data,
  input  logic b_we, input logic [$clog2(OC)-1:0] b_addr, input logic signed [15:0] b_data,
  input  logic [5:0] out_shift,
  // tokens
  output logic o_valid,
  output logic [$clog2(OH*OH)-1:0] o_tok,
  output logic [$clog2(OC)-1:0] o_c,
  output logic signed [7:0] o_data
);
  typedef enum logic [2:0] {B_IDLE, B_START, B_DCT, B_NEXT, B_CONV} bstate_t;
  bstate_t st;
  localparam int GW = $clog2(G+1);
  logic [GW-1:0] by, bx;
  logic [1:0] ch;
  logic signed [7:0] fm [G][G][CT];

  // DCT engine
  logic d_start, d_busy, d_done, y_valid;
  logic [$clog2(N+1)-1:0] x_i0, x_j;
  logic [$clog2((RY > SY) ? RY : SY)-1:0] y_k, y_v;  // tile coordinates
  logic signed [7:0] y_data;
  logic [$clog2(RY+1)-1:0] rnum;
  logic [$clog2(SY+1)-1:0] snum;
  assign rnum = (ch == 2'd0) ? ($clog2(RY+1))'(RY) : ($clog2(RY+1))'(RC);
  assign snum = (ch == 2'd0) ? ($clog2(SY+1))'(SY) : ($clog2(SY+1))'(SC);
  pruned_dct #(.N(N), .P(P), .R_MAX(RY), .S_MAX(SY), .T(T)) u_dct (
    .clk, .rst_n, .start(d_start), .r_num(rnum), .s_num(snum), .busy(d_busy), .done(d_done),
    .x_i0, .x_j, .x_data(fb_data), .y_valid, .y_k, .y_v, .y_data);
  assign fb_plane = ch;
  assign fb_row = $clog2(IMGS)'(int'(by) * N + int'(x_i0));
  assign fb_col = $clog2(IMGS)'(int'(bx) * N + int'(x_j));

  // zigzag routing
  localparam int ZW = $clog2(N*N);
  logic zsel;
  logic [ZW-1:0] zidx;
  logic [ZW:0] klim;
  assign klim = (ch == 2'd0) ? (ZW+1)'(KY) : (ZW+1)'(KC);
  zigzag_select #(.N(N), .IW(ZW)) u_zz (
    .r($clog2(N)'(y_k)), .c($clog2(N)'(y_v)), .k_lim(klim), .sel(zsel), .idx(zidx));
  int choff;
  assign choff = (ch == 2'd0) ? 0 : (ch == 2'd1) ? KY : KY + KC;

  always_ff @(posedge clk) begin
    if (y_valid && zsel) fm[by][bx][choff + int'(zidx)] <= y_data;
  end

  // conv
  logic c_start, c_busy, c_done, c_valid;
  logic unused_busy;
  assign unused_busy = d_busy ^ c_busy;
  logic [$clog2(G)-1:0] fm_y, fm_x;
  logic signed [7:0] fm_data [CT];
  logic [$clog2(OH+1)-1:0] c_oy, c_ox;
  always_comb for (int i = 0; i < CT; i++) fm_data[i] = fm[fm_y][fm_x][i];
  conv_lut #(.IH(G), .IC(CT), .OC(OC), .KS(KS)) u_conv (
    .clk, .rst_n, .w_we, .w_addr, .w_data, .b_we, .b_addr, .b_data, .out_shift,
    .start(c_start), .busy(c_busy), .done(c_done), .fm_y, .fm_x, .fm_data,
    .o_valid(c_valid), .o_y(c_oy), .o_x(c_ox), .o_c, .o_data);
  assign o_valid = c_valid;
  assign o_tok = $clog2(OH*OH)'(int'(c_oy) * OH + int'(c_ox));

  assign d_start = (st == B_START);
  assign c_start = (st == B_NEXT) && (int'(by) == G);
  assign busy = (st != B_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= B_IDLE; by <= '0; bx <= '0; ch <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        B_IDLE: if (start) begin st <= B_START; by <= '0; bx <= '0; ch <= '0; end
        B_START: st <= B_DCT;
        B_DCT: if (d_done) st <= B_NEXT;
        B_NEXT: begin
          if (int'(by) == G) st <= B_CONV;
          else begin
            st <= B_START;
            if (ch == 2'd2) begin
              ch <= '0;
              if (int'(bx) == G - 1) begin
                bx <= '0; by <= by + 1'b1;
                if (int'(by) == G - 1) st <= B_NEXT;
              end else bx <= bx + 1'b1;
            end else ch <= ch + 1'b1;
          end
        end
        B_CONV: if (c_done) begin st <= B_IDLE; done <= 1'b1; end
        default: st <= B_IDLE;
      endcase
    end
  end
endmodule

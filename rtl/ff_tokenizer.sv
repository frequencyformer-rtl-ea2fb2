// ff_tokenizer: the near-sensor multi-scale DCT tokenizer.
//
// Stores one YCbCr frame in frame_buffer and, on start, runs the three
// branches in parallel, each on its own frame read port:
//   branch 1 (8x8 block DCT, zigzag 14/5/5, conv k=4 s=4)   -> T1, TS x TS x 24
//   branch 2 (32x32 block DCT, zigzag 96/24/24, conv k=1)    -> T2, TS x TS x 24
//   branch 3 (global DCT, conv k=PK s=PK, zigzag 14/5/5)     -> T3, 1 x 24
// with TS = IMGS/32 (7 at 224x224). When all three are done, the first
// cross-attention stage lets T1 attend to T2 (T12), the second lets T12 attend
// to T3 (T_out). T_out, TS*TS tokens of 24 INT8 channels, is the frame's
// output and is read byte by byte through tok_addr (token*24 + channel).
// Weights and biases of all convolutions and projections are written through
// one bus (w_sel picks the store, see ff_pkg::wsel_t); cfg holds the
// requantisation shifts. done pulses when T_out is complete.
// The branch structure, selections, kernel sizes and the cascaded fusion follow
// the tokenizer description; running the branches concurrently and the
// programming bus are this design's choices.
module ff_tokenizer
  import ff_pkg::*;
#(
  parameter int IMGS = 224,
  parameter int P1 = 8,
  parameter int P2 = 8,
  parameter int P3 = IMGS / 8,
  parameter int PK = IMGS / 8,
  parameter int TS = IMGS / 32,
  parameter int NT = TS * TS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic frame_start,
  input  logic pix_valid,
  input  logic [7:0] pix_y, pix_cb, pix_cr,
  output logic frame_full,
  input  logic w_we,
  input  wsel_t w_sel,
  input  logic [15:0] w_addr,
  input  logic [15:0] w_data,
  input  tok_cfg_t cfg,
  input  logic start,
  output logic busy,
  output logic done,
  input  logic [$clog2(NT*D_TOK)-1:0] tok_addr,
  output logic [7:0] tok_data
);
  localparam int AW = $clog2(IMGS);
  logic [1:0] p1, p2, p3;
  logic [AW-1:0] r1, c1, r2, c2, r3, c3;
  logic [7:0] d1 [P1];
  logic [7:0] d2 [P2];
  logic [7:0] d3 [P3];
  frame_buffer #(.IMG(IMGS), .P1(P1), .P2(P2), .P3(P3)) u_fb (
    .clk, .rst_n, .frame_start, .wr_valid(pix_valid), .wr_y(pix_y), .wr_cb(pix_cb), .wr_cr(pix_cr),
    .frame_full,
    .rd1_plane(p1), .rd1_row(r1), .rd1_col(c1), .rd1_data(d1),
    .rd2_plane(p2), .rd2_row(r2), .rd2_col(c2), .rd2_data(d2),
    .rd3_plane(p3), .rd3_row(r3), .rd3_col(c3), .rd3_data(d3));

  logic signed [7:0] t1 [NT][D_TOK];
  logic signed [7:0] t2 [NT][D_TOK];
  logic signed [7:0] t3 [1][D_TOK];
  logic signed [7:0] t12 [NT][D_TOK];
  logic signed [7:0] tout [NT][D_TOK];

  typedef enum logic [2:0] {K_IDLE, K_BR, K_A1, K_A1W, K_A2, K_A2W} kstate_t;
  kstate_t st;
  logic br_start, b1_done, b2_done, b3_done, f1, f2, f3;
  logic b1_busy, b2_busy, b3_busy;
  assign br_start = (st == K_IDLE) && start;

  // branch 1
  logic o1_v; logic [$clog2(NT)-1:0] o1_t; logic [$clog2(D_TOK)-1:0] o1_c; logic signed [7:0] o1_d;
  branch_block #(.IMGS(IMGS), .N(8), .P(P1), .KY(K1_Y), .KC(K1_C), .T(4), .KS(4), .OC(D_TOK)) u_b1 (
    .clk, .rst_n, .start(br_start), .busy(b1_busy), .done(b1_done),
    .fb_plane(p1), .fb_row(r1), .fb_col(c1), .fb_data(d1),
    .w_we(w_we && w_sel == W_CONV1), .w_addr(w_addr[$clog2(24*4*4*24)-1:0]), .w_data(w_data[7:0]),
    .b_we(w_we && w_sel == W_BIAS1), .b_addr(w_addr[4:0]), .b_data(w_data),
    .out_shift(cfg.b1_shift), .o_valid(o1_v), .o_tok(o1_t), .o_c(o1_c), .o_data(o1_d));
  always_ff @(posedge clk) if (o1_v) t1[o1_t][o1_c] <= o1_d;

  // branch 2
  logic o2_v; logic [$clog2(NT)-1:0] o2_t; logic [$clog2(D_TOK)-1:0] o2_c; logic signed [7:0] o2_d;
  branch_block #(.IMGS(IMGS), .N(32), .P(P2), .KY(K2_Y), .KC(K2_C), .T(12), .KS(1), .OC(D_TOK)) u_b2 (
    .clk, .rst_n, .start(br_start), .busy(b2_busy), .done(b2_done),
    .fb_plane(p2), .fb_row(r2), .fb_col(c2), .fb_data(d2),
    .w_we(w_we && w_sel == W_CONV2), .w_addr(w_addr[$clog2(24*144)-1:0]), .w_data(w_data[7:0]),
    .b_we(w_we && w_sel == W_BIAS2), .b_addr(w_addr[4:0]), .b_data(w_data),
    .out_shift(cfg.b2_shift), .o_valid(o2_v), .o_tok(o2_t), .o_c(o2_c), .o_data(o2_d));
  always_ff @(posedge clk) if (o2_v) t2[o2_t][o2_c] <= o2_d;

  // branch 3
  localparam int W3A = $clog2(3 * PK * PK);
  logic o3_v; logic [$clog2(D_TOK)-1:0] o3_c; logic signed [7:0] o3_d;
  branch_global #(.IMGS(IMGS), .P(P3), .PK(PK), .KY(K1_Y), .KC(K1_C), .T(56)) u_b3 (
    .clk, .rst_n, .start(br_start), .busy(b3_busy), .done(b3_done),
    .fb_plane(p3), .fb_row(r3), .fb_col(c3), .fb_data(d3),
    .w_we(w_we && w_sel == W_CONV3), .w_addr(w_addr[W3A-1:0]), .w_data(w_data[7:0]),
    .b_we(w_we && w_sel == W_BIAS3), .b_addr(w_addr[1:0]), .b_data(w_data),
    .out_shift(cfg.b3_shift), .o_valid(o3_v), .o_c(o3_c), .o_data(o3_d));
  always_ff @(posedge clk) if (o3_v) t3[0][o3_c] <= o3_d;

  // fusion
  logic a1_start, a1_busy, a1_done, a2_start, a2_busy, a2_done;
  localparam int WAA = $clog2(D_TOK * D_TOK);
  cross_attention #(.NQ(NT), .NK(NT), .D(D_TOK)) u_a1 (
    .clk, .rst_n, .w_we(w_we && (w_sel == W_A1Q || w_sel == W_A1K || w_sel == W_A1V)),
    .w_sel(2'(int'(w_sel) - int'(W_A1Q))), .w_addr(w_addr[WAA-1:0]), .w_data(w_data[7:0]),
    .proj_shift(cfg.a_proj_shift), .out_shift(cfg.a_out_shift), .scale_mul(cfg.a_scale_mul),
    .start(a1_start), .tq(t1), .tkv(t2), .busy(a1_busy), .done(a1_done), .tout(t12));
  cross_attention #(.NQ(NT), .NK(1), .D(D_TOK)) u_a2 (
    .clk, .rst_n, .w_we(w_we && (w_sel == W_A2Q || w_sel == W_A2K || w_sel == W_A2V)),
    .w_sel(2'(int'(w_sel) - int'(W_A2Q))), .w_addr(w_addr[WAA-1:0]), .w_data(w_data[7:0]),
    .proj_shift(cfg.a_proj_shift), .out_shift(cfg.a_out_shift), .scale_mul(cfg.a_scale_mul),
    .start(a2_start), .tq(t12), .tkv(t3), .busy(a2_busy), .done(a2_done), .tout(tout));
  assign a1_start = (st == K_A1);
  assign a2_start = (st == K_A2);
  assign busy = (st != K_IDLE);

  assign tok_data = tout[int'(tok_addr) / D_TOK][int'(tok_addr) % D_TOK];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= K_IDLE; f1 <= 1'b0; f2 <= 1'b0; f3 <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        K_IDLE: if (start) begin st <= K_BR; f1 <= 1'b0; f2 <= 1'b0; f3 <= 1'b0; end
        K_BR: begin
          if (b1_done) f1 <= 1'b1;
          if (b2_done) f2 <= 1'b1;
          if (b3_done) f3 <= 1'b1;
          if ((f1 || b1_done) && (f2 || b2_done) && (f3 || b3_done)) st <= K_A1;
        end
        K_A1: st <= K_A1W;
        K_A1W: if (a1_done) st <= K_A2;
        K_A2: st <= K_A2W;
        K_A2W: if (a2_done) begin st <= K_IDLE; done <= 1'b1; end
        default: st <= K_IDLE;
      endcase
    end
  end
  logic unused;
  assign unused = b1_busy ^ b2_busy ^ b3_busy ^ a1_busy ^ a2_busy ^ (^w_addr[15:14]);
endmodule

// cross_attention: single-head cross-attention stage of the branch fusion.
//
// T_out = T_q + softmax((T_q W_Q)(T_kv W_K)^T / sqrt(d_k)) (T_kv W_V), with
// NQ query tokens, NK key/value tokens and D channels (d_k = D). The three
// D x D projection matrices live in SRAM-backed D&C LUT stores (address
// o*D + i for output o, input i; w_sel picks Q, K or V) and the tokens are the
// data operands, D LUT multipliers wide, one projected element per cycle.
// Projections are requantised to INT8 by proj_shift. Scores Q.K are plain
// products of two data operands (no fixed weight to tabulate). softmax_unit
// turns one row of scores into 8-bit probabilities; the weighted sum of V is
// accumulated D-wide, one key per cycle, and requantised by out_shift
// together with the residual T_q. tout[] is valid from done until the next
// start.
// Timing: (NQ + 2*NK)*D + NQ*(5*NK + 5) cycles approximately.
// Eq. (6)-(7) of the fusion give the attention; the residual add is taken from
// the adder drawn in the tokenizer diagram. Single head, d_k = D, the
// requantisation points and the fixed-point softmax are this design's choices.
module cross_attention #(
  parameter int NQ = 49,
  parameter int NK = 49,
  parameter int D  = 24,
  parameter int WA = $clog2(D*D)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic w_we,
  input  logic [1:0] w_sel,
  input  logic [WA-1:0] w_addr,
  input  logic signed [7:0] w_data,
  input  logic [5:0] proj_shift,
  input  logic [5:0] out_shift,
  input  logic [15:0] scale_mul,
  input  logic start,
  input  logic signed [7:0] tq  [NQ][D],
  input  logic signed [7:0] tkv [NK][D],
  output logic busy,
  output logic done,
  output logic signed [7:0] tout [NQ][D]
);
  typedef enum logic [3:0] {A_IDLE, A_PQ, A_PK, A_PV, A_S, A_SM, A_SMW, A_AV, A_OUT} astate_t;
  astate_t st;
  localparam int LW = 10, PW = 20;
  localparam int NW = (NQ > NK) ? $clog2(NQ + 1) : $clog2(NK + 1);
  localparam int DW = $clog2(D + 1);
  logic [NW-1:0] n, m;
  localparam int MW = (NK > 1) ? $clog2(NK) : 1;
  logic [MW-1:0] mk; // m narrowed to the key/value array index
  assign mk = MW'(m);
  logic [DW-1:0] o;
  logic signed [7:0] qm [NQ][D];
  logic signed [7:0] km [NK][D];
  logic signed [7:0] vm [NK][D];
  logic signed [31:0] sc [NK];
  logic signed [31:0] acc [D];
  logic [7:0] pr [NK];

  // projection: one output element per cycle
  logic signed [LW-1:0] lq [D][4], lk [D][4], lv [D][4], lsel [D][4];
  logic [WA-1:0] raddr;
  assign raddr = WA'(int'(o) * D);
  lut_weight_sram #(.DEPTH(D*D), .P(D), .LW(LW)) u_wq (.clk, .we(w_we && w_sel == 2'd0), .waddr(w_addr), .wdata(w_data), .raddr, .lut(lq));
  lut_weight_sram #(.DEPTH(D*D), .P(D), .LW(LW)) u_wk (.clk, .we(w_we && w_sel == 2'd1), .waddr(w_addr), .wdata(w_data), .raddr, .lut(lk));
  lut_weight_sram #(.DEPTH(D*D), .P(D), .LW(LW)) u_wv (.clk, .we(w_we && w_sel == 2'd2), .waddr(w_addr), .wdata(w_data), .raddr, .lut(lv));
  logic signed [7:0] xin [D];
  always_comb begin
    for (int d = 0; d < D; d++) begin
      lsel[d] = (st == A_PQ) ? lq[d] : (st == A_PK) ? lk[d] : lv[d];
      xin[d]  = (st == A_PQ) ? tq[n][d] : tkv[mk][d];
    end
  end
  logic signed [PW-1:0] prod [D];
  for (genvar g = 0; g < D; g++) begin : g_lane
    dnc_lut_mul #(.XW(8), .LW(LW), .PW(PW)) u_mul (.lut(lsel[g]), .x(xin[g]), .p(prod[g]));
  end
  logic signed [31:0] psum;
  always_comb begin
    psum = '0;
    for (int d = 0; d < D; d++) psum = psum + 32'(prod[d]);
  end
  logic signed [7:0] prq;
  haq_requant #(.IW(32), .OW(8)) u_prq (.din(psum), .shift(proj_shift), .bits(5'd8), .dout(prq));

  // score of query n against key m
  logic signed [31:0] dot;
  always_comb begin
    dot = '0;
    for (int d = 0; d < D; d++) dot = dot + 32'(qm[n][d]) * 32'(km[mk][d]);
  end

  // softmax
  logic sm_start, sm_done;
  softmax_unit #(.NK(NK)) u_sm (.clk, .rst_n, .start(sm_start), .scores(sc), .scale_mul, .done(sm_done), .probs(pr));
  assign sm_start = (st == A_SM);

  // output with residual
  logic signed [7:0] orq [D];
  for (genvar g = 0; g < D; g++) begin : g_out
    haq_requant #(.IW(32), .OW(8)) u_orq (
      .din(acc[g] + (32'(tq[n][g]) <<< out_shift)), .shift(out_shift), .bits(5'd8), .dout(orq[g]));
  end

  assign busy = (st != A_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; n <= '0; m <= '0; o <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        A_IDLE: if (start) begin st <= A_PQ; n <= '0; m <= '0; o <= '0; end
        A_PQ: begin
          qm[n][o] <= prq;
          if (int'(o) == D - 1) begin
            o <= '0;
            if (int'(n) == NQ - 1) begin n <= '0; st <= A_PK; end else n <= n + 1'b1;
          end else o <= o + 1'b1;
        end
        A_PK, A_PV: begin
          if (st == A_PK) km[mk][o] <= prq; else vm[mk][o] <= prq;
          if (int'(o) == D - 1) begin
            o <= '0;
            if (int'(m) == NK - 1) begin
              m <= '0;
              st <= (st == A_PK) ? A_PV : A_S;
            end else m <= m + 1'b1;
          end else o <= o + 1'b1;
        end
        A_S: begin
          sc[mk] <= dot;
          if (int'(m) == NK - 1) begin m <= '0; st <= A_SM; end else m <= m + 1'b1;
        end
        A_SM: st <= A_SMW;
        A_SMW: if (sm_done) begin
          st <= A_AV; m <= '0;
          for (int d = 0; d < D; d++) acc[d] <= '0;
        end
        A_AV: begin
          for (int d = 0; d < D; d++) acc[d] <= acc[d] + 32'($signed({1'b0, pr[mk]})) * 32'(vm[mk][d]);
          if (int'(m) == NK - 1) begin m <= '0; st <= A_OUT; end else m <= m + 1'b1;
        end
        A_OUT: begin
          for (int d = 0; d < D; d++) tout[n][d] <= orq[d];
          if (int'(n) == NQ - 1) begin n <= '0; st <= A_IDLE; done <= 1'b1; end
          else begin n <= n + 1'b1; st <= A_S; end
        end
        default: st <= A_IDLE;
      endcase
    end
  end
endmodule

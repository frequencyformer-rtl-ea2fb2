// pruned_dct: selection-aware pruned 2-D DCT of one N x N block with
// harmonic-aware quantisation.
//
// Computes only the r_num x s_num top-left tile Y = C_row X C_col^T that
// holds the zigzag-selected coefficients, in two stages:
//   row stage    I[k][j] = sum_i C~[k][i] * X[i][j]   (k < r_num, j < N)
//   column stage Y[k][v] = sum_j I~[k][j] * C~[v][j]  (v < s_num)
// Pixels arrive as unsigned 8-bit values and are level-shifted by 128 to INT8.
// In the row stage harmonic k uses b_k bits: the coefficient is stored at b_k
// bits and the pixel operand is its upper b_k bits (arithmetic shift). Each
// row result is requantised to b_k bits (shift b_k-1+clog2(N), a bound that
// never clips). In the column stage the operand I~[k][j] is cut to
// m = min(b_k, b_v) bits and the result is requantised to INT8 with shift
// (m-1)+(b_v-1)+clog2(N)-7. P lanes of D&C LUT multipliers work on P
// consecutive terms of one dot product per cycle, so one dot product takes
// N/P cycles.
// Interface: pulse start with r_num/s_num stable; the block is read through
// x_i0/x_j (P consecutive rows x_i0.., column x_j, returned the same cycle on
// x_data). One coefficient per N/P cycles appears on y_valid/y_k/y_v/y_data
// in row-major order; done pulses after the last one.
// Timing: r_num*N*(N/P) + r_num*s_num*(N/P) + 1 cycles from start to done.
// The stage order, the matched-precision truncation and the requantisation
// between stages follow the tokenizer description; the shift amounts, the
// level shift and the lane schedule are this design's choices.
module pruned_dct
  import ff_pkg::*;
#(
  parameter int N = 8,
  parameter int P = 8,
  parameter int R_MAX = 5,
  parameter int S_MAX = 4,
  parameter int T = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(R_MAX+1)-1:0] r_num,
  input  logic [$clog2(S_MAX+1)-1:0] s_num,
  output logic                      busy,
  output logic                      done,
  // block read port
  output logic [$clog2(N+1)-1:0]    x_i0,
  output logic [$clog2(N+1)-1:0]    x_j,
  input  logic [7:0]                x_data [P],
  // coefficient stream
  output logic                      y_valid,
  output logic [$clog2((R_MAX > S_MAX) ? R_MAX : S_MAX)-1:0] y_k,
  output logic [$clog2((R_MAX > S_MAX) ? R_MAX : S_MAX)-1:0] y_v,
  output logic signed [7:0]         y_data
);
  localparam int NC  = N / P;            // chunks per dot product
  localparam int LN  = $clog2(N);
  localparam int LW  = 10;
  localparam int PW  = 20;
  localparam int AW  = 32;
  localparam int RW  = $clog2((R_MAX > S_MAX) ? R_MAX : S_MAX);
  localparam int CW  = (NC > 1) ? $clog2(NC) : 1;
  localparam int JW  = $clog2(N+1);
  localparam int JI  = $clog2(N);
  // the dot products are cut into N/P equal chunks
  if (N % P != 0) begin : g_bad_p
    $error("pruned_dct: P must divide N");
  end

  typedef enum logic [1:0] {S_IDLE, S_ROW, S_COL} state_t;
  state_t state;

  logic [RW-1:0] k, v;
  logic [JW-1:0] j;
  logic [CW-1:0] c;
  logic signed [AW-1:0] acc;
  logic signed [7:0] ibuf [R_MAX][N];
  logic [4:0] bk_reg;

  // ROM access: row k in the row stage, row v in the column stage.
  logic [RW-1:0] rom_row;
  logic [JW-1:0] rom_base;
  logic signed [LW-1:0] lut [P][4];
  logic [4:0] rom_bits;
  assign rom_row  = (state == S_COL) ? v : k;
  assign rom_base = JW'(int'(c) * P);
  dct_lut_rom #(.N(N), .R(R_MAX), .T(T), .P(P), .LW(LW)) u_rom (
    .row(rom_row), .base(rom_base), .lut(lut), .bits(rom_bits));

  // Operands for the P lanes.
  logic [4:0] m_bits;
  assign m_bits = (state == S_COL) ? ((bk_reg < rom_bits) ? bk_reg : rom_bits) : rom_bits;
  logic signed [7:0] opnd [P];
  logic signed [PW-1:0] prod [P];
  always_comb begin
    for (int p = 0; p < P; p++) begin
      if (state == S_COL)
        opnd[p] = ibuf[k][int'(c) * P + p] >>> (bk_reg - m_bits);
      else
        opnd[p] = $signed(x_data[p] - 8'd128) >>> (5'd8 - rom_bits);
    end
  end
  for (genvar gp = 0; gp < P; gp++) begin : g_lane
    dnc_lut_mul #(.XW(8), .LW(LW), .PW(PW)) u_mul (.lut(lut[gp]), .x(opnd[gp]), .p(prod[gp]));
  end
  logic signed [AW-1:0] psum, total;
  always_comb begin
    psum = '0;
    for (int p = 0; p < P; p++) psum = psum + AW'(prod[p]);
    total = acc + psum;
  end

  // Requantisation of the finished dot product.
  logic [5:0] rq_shift;
  logic [4:0] rq_bits;
  logic signed [7:0] rq_out;
  always_comb begin
    if (state == S_COL) begin
      rq_shift = 6'(int'(m_bits) - 1 + int'(rom_bits) - 1 + LN - 7);
      rq_bits  = 5'd8;
    end else begin
      rq_shift = 6'(int'(rom_bits) - 1 + LN);
      rq_bits  = rom_bits;
    end
  end
  haq_requant #(.IW(AW), .OW(8)) u_rq (.din(total), .shift(rq_shift), .bits(rq_bits), .dout(rq_out));

  assign x_i0 = JW'(int'(c) * P);
  assign x_j  = j;
  assign busy = (state != S_IDLE);

  logic last_chunk;
  assign last_chunk = (int'(c) == NC - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      k <= '0; v <= '0; j <= '0; c <= '0;
      acc <= '0; bk_reg <= '0;
      done <= 1'b0; y_valid <= 1'b0; y_k <= '0; y_v <= '0; y_data <= '0;
    end else begin
      done    <= 1'b0;
      y_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_ROW; k <= '0; j <= '0; c <= '0; acc <= '0;
        end
        S_ROW: begin
          if (!last_chunk) begin
            acc <= total; c <= c + 1'b1;
          end else begin
            ibuf[k][JI'(j)] <= rq_out;
            acc <= '0; c <= '0;
            if (int'(j) == N - 1) begin
              j <= '0;
              if (int'(k) == int'(r_num) - 1) begin
                state <= S_COL; k <= '0; v <= '0;
              end else k <= k + 1'b1;
            end else j <= j + 1'b1;
          end
          if (int'(k) == int'(r_num) - 1 && int'(j) == N - 1 && last_chunk) bk_reg <= haq_bits_rt(0);
        end
        S_COL: begin
          if (!last_chunk) begin
            acc <= total; c <= c + 1'b1;
          end else begin
            acc <= '0; c <= '0;
            y_valid <= 1'b1; y_k <= k; y_v <= v; y_data <= rq_out;
            if (int'(v) == int'(s_num) - 1) begin
              v <= '0;
              if (int'(k) == int'(r_num) - 1) begin
                state <= S_IDLE; done <= 1'b1;
              end else begin
                k <= k + 1'b1;
                bk_reg <= haq_bits_rt(int'(k) + 1);
              end
            end else v <= v + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Bit width of harmonic row kk at run time (same schedule as the ROM).
  logic [4:0] bits_tab [R_MAX];
  for (genvar g = 0; g < R_MAX; g++) begin : g_bits
    assign bits_tab[g] = 5'(haq_bits(g, BMAX, BMIN, T));
  end
  function automatic logic [4:0] haq_bits_rt(int kk);
    return (kk < R_MAX) ? bits_tab[kk] : bits_tab[R_MAX-1];
  endfunction
endmodule

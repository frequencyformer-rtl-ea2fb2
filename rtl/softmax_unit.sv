// softmax_unit: softmax over one row of NK attention scores.
//
// Works in base 2 on fixed-point values. Pass 1 finds the row maximum. Pass 2
// forms z_j = ((max - s_j) * scale_mul) >> 8, a non-negative exponent in
// Q.8 log2 units (scale_mul folds 1/sqrt(d_k), log2(e) and the score
// quantisation scale), and e_j = 2^(-z_j) as a 16-entry table of 2^(-f/16)
// in Q1.15 for the fraction, shifted right by the integer part; the e_j are
// summed. One division gives recip = 2^24 / sum. Pass 3 emits
// p_j = min(255, (e_j * recip) >> 16), the probability in UQ0.8.
// Interface: load scores[] and pulse start; probs[] are valid when done
// pulses. Timing: 3*NK + 2 cycles from start to done.
// The tokenizer keeps softmax in FP16 in a small dedicated unit; this unit
// replaces FP16 by the fixed-point base-2 scheme above (a departure), with
// 8-bit probabilities.
module softmax_unit #(
  parameter int NK = 49
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic signed [31:0] scores [NK],
  input  logic [15:0] scale_mul,
  output logic done,
  output logic [7:0] probs [NK]
);
  typedef enum logic [2:0] {X_IDLE, X_MAX, X_EXP, X_RECIP, X_NORM} xstate_t;
  xstate_t st;
  localparam int IW = (NK > 1) ? $clog2(NK) : 1;
  logic [IW-1:0] j;
  logic signed [31:0] mx;
  logic [15:0] e [NK];
  logic [31:0] sum;
  logic [31:0] recip;

  // 2^(-f/16) in Q1.15, f = 0..15
  function automatic logic [15:0] exp2_tab(int f);
    return 16'($rtoi(32768.0 * $pow(2.0, -real'(f) / 16.0) + 0.5));
  endfunction
  logic [15:0] tab [16];
  for (genvar g = 0; g < 16; g++) begin : g_tab
    assign tab[g] = exp2_tab(g);
  end

  logic [47:0] zfull;
  logic [31:0] z;
  logic [15:0] ej;
  always_comb begin
    zfull = 48'(32'(mx - scores[j])) * 48'(scale_mul);
    z = (zfull[47:8] > 40'hFFFF_FFFF) ? 32'hFFFF_FFFF : zfull[39:8];
    ej = (z[31:8] >= 24'd16) ? 16'd0 : (tab[z[7:4]] >> z[11:8]);
  end
  logic [47:0] pn;
  assign pn = 48'(e[j]) * 48'(recip);
  // fraction bits dropped by the fixed-point format
  logic unused;
  assign unused = (^zfull[7:0]) ^ (^z[3:0]) ^ (^pn[15:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= X_IDLE; j <= '0; mx <= '0; sum <= '0; recip <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        X_IDLE: if (start) begin st <= X_MAX; j <= '0; mx <= scores[0]; end
        X_MAX: begin
          if (scores[j] > mx) mx <= scores[j];
          if (int'(j) == NK - 1) begin j <= '0; st <= X_EXP; sum <= '0; end
          else j <= j + 1'b1;
        end
        X_EXP: begin
          e[j] <= ej;
          sum <= sum + 32'(ej);
          if (int'(j) == NK - 1) begin j <= '0; st <= X_RECIP; end
          else j <= j + 1'b1;
        end
        X_RECIP: begin
          recip <= (sum == 0) ? 32'hFFFF_FFFF : (32'd1 << 24) / sum;
          st <= X_NORM;
        end
        X_NORM: begin
          probs[j] <= (pn[47:24] != 24'd0) ? 8'd255 : pn[23:16];
          if (int'(j) == NK - 1) begin j <= '0; st <= X_IDLE; done <= 1'b1; end
          else j <= j + 1'b1;
        end
        default: st <= X_IDLE;
      endcase
    end
  end
endmodule

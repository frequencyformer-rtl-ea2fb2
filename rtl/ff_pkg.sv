// ff_pkg: constants and constant functions shared by the frequency-domain tokenizer.
//
// Holds the configuration of the 24-channel tokenizer (zigzag coefficient counts per
// colour plane, image size, token shape), the harmonic-aware bit-width schedule
// b_k = round(bmax - (bmax-bmin)*k/t), clamped to bmin for k > t, the HAQ-quantised
// DCT basis row generator, and the JPEG zigzag index used for channel selection.
// The schedule, basis and zigzag order follow the tokenizer description; rounding
// half away from zero is this design's choice. All functions are evaluated at
// elaboration time only: they build constant ROM contents and loop bounds.
package ff_pkg;

  // Image and token geometry (24-channel configuration, 7x7 output tokens).
  localparam int IMG      = 224;
  localparam int D_TOK    = 24;

  // Zigzag coefficient counts per plane (Y, Cb, Cr).
  localparam int K1_Y = 14, K1_C = 5;     // branch 1 and branch 3
  localparam int K2_Y = 96, K2_C = 24;    // branch 2

  // Run-time requantisation settings of the tokenizer (written at deployment
  // together with the weights).
  typedef struct packed {
    logic [5:0]  b1_shift;      // branch 1 conv output
    logic [5:0]  b2_shift;      // branch 2 conv output
    logic [5:0]  b3_shift;      // branch 3 pooling conv output
    logic [5:0]  a_proj_shift;  // attention Q/K/V projections
    logic [5:0]  a_out_shift;   // attention output
    logic [15:0] a_scale_mul;   // softmax exponent scale
  } tok_cfg_t;

  // Weight programming targets.
  typedef enum logic [3:0] {
    W_CONV1 = 4'd0, W_BIAS1 = 4'd1, W_CONV2 = 4'd2, W_BIAS2 = 4'd3,
    W_CONV3 = 4'd4, W_BIAS3 = 4'd5,
    W_A1Q = 4'd6, W_A1K = 4'd7, W_A1V = 4'd8,
    W_A2Q = 4'd9, W_A2K = 4'd10, W_A2V = 4'd11
  } wsel_t;

  // Harmonic-aware quantisation.
  localparam int BMAX = 8;
  localparam int BMIN = 4;

  // Bit width of harmonic k.
  function automatic int haq_bits(int k, int bmax, int bmin, int t);
    real b;
    if (k > t) return bmin;
    b = real'(bmax) - real'(bmax - bmin) * real'(k) / real'(t);
    return $rtoi(b + 0.5);
  endfunction

  // Zigzag scan position of cell (r, c) of an n x n grid.
  function automatic int zz_index(int n, int r, int c);
    int d, nprev, first;
    d = r + c;
    if (d < n) begin
      nprev = d * (d + 1) / 2;
      return nprev + (((d % 2) == 0) ? c : r);
    end
    nprev = n * n - (2 * n - 1 - d) * (2 * n - d) / 2;
    first  = d - n + 1;
    return nprev + (((d % 2) == 0) ? (c - first) : (r - first));
  endfunction

  // Number of distinct rows (equivalently columns) touched by the first k
  // zigzag positions of an n x n grid.
  function automatic int zz_rows(int n, int k);
    int m;
    m = 0;
    for (int r = 0; r < n; r++)
      for (int c = 0; c < n; c++)
        if (zz_index(n, r, c) < k && r + 1 > m) m = r + 1;
    return m;
  endfunction

  // Number of distinct columns touched by the first k zigzag positions.
  function automatic int zz_cols(int n, int k);
    int m;
    m = 0;
    for (int r = 0; r < n; r++)
      for (int c = 0; c < n; c++)
        if (zz_index(n, r, c) < k && c + 1 > m) m = c + 1;
    return m;
  endfunction

  // Row k of the N-point DCT basis, quantised symmetrically to b bits with a
  // per-row step equal to the row's infinity norm / (2^(b-1)-1). Entry i sits
  // at bits [8*i +: 8] (sign-extended to 8 bits).
  function automatic logic [IMG*8-1:0] dct_row(int n, int k, int b);
    logic [IMG*8-1:0] r;
    real mx, c, pi, q;
    logic signed [7:0] v;
    pi = 3.14159265358979323846;
    r  = '0;
    mx = 0.0;
    for (int i = 0; i < n; i++) begin
      c = $cos(pi * real'((2 * i + 1) * k) / real'(2 * n));
      if (c < 0.0) c = -c;
      if (c > mx) mx = c;
    end
    for (int i = 0; i < n; i++) begin
      c = $cos(pi * real'((2 * i + 1) * k) / real'(2 * n));
      q = c / mx * real'((1 << (b - 1)) - 1);
      v = 8'($rtoi(q >= 0.0 ? q + 0.5 : q - 0.5));
      r[8*i +: 8] = v;
    end
    return r;
  endfunction

endpackage

// tb_ff_tokenizer: the complete tokenizer on a 64x64 frame (TS = 2, four
// output tokens; branch-3 pooling kernel 8 so the pooled grid stays 8x8).
// Programs all weights through the bus, loads two random frames in raster
// order, runs the tokenizer and compares all TS*TS*24 output bytes with the
// reference (three branches, two cross-attention stages). Also checks that
// frame_full rises after IMGS*IMGS pixels and that done pulses once.
// The branch structure and cascade follow the paper; the 64x64 size, weights
// and shifts are the test's.
module tb_ff_tokenizer;
  import ff_pkg::*;
  import ff_ref_pkg::*;
  localparam int IMGS = 64, TS = IMGS / 32, NT = TS * TS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic frame_start = 0, pix_valid = 0, frame_full, w_we = 0, start = 0, busy, done;
  logic [7:0] pix_y, pix_cb, pix_cr, tok_data;
  wsel_t w_sel; logic [15:0] w_addr, w_data;
  tok_cfg_t cfg;
  logic [$clog2(NT*D_TOK)-1:0] tok_addr;
  int checks = 0, failures = 0, ndone = 0, cyc;
  ff_tokenizer #(.IMGS(IMGS), .P1(8), .P2(8), .P3(8)) dut (.clk, .rst_n, .frame_start, .pix_valid,
    .pix_y, .pix_cb, .pix_cr, .frame_full, .w_we, .w_sel, .w_addr, .w_data, .cfg, .start, .busy, .done,
    .tok_addr, .tok_data);
  // ---- stimulus: random weights via the programming bus, frames, reference ----
  int fr[], w1[], b1[], w2[], b2[], w3[], b3[], aw[6][], tref[];
  localparam int SH1 = 9, SH2 = 8, SH3 = 8, PSH = 6, OSH = 8, SCM = 300;
  task automatic prog(wsel_t s, int n, int lo, int hi, inout int arr[]);
    arr = new[n];
    for (int a = 0; a < n; a++) begin
      @(negedge clk); w_we = 1; w_sel = s; w_addr = 16'(a);
      arr[a] = int'($urandom % (hi - lo + 1)) + lo; w_data = 16'(arr[a]);
    end
    @(negedge clk); w_we = 0;
  endtask
  task automatic program_all();
    prog(W_CONV1, 24*4*4*24, -15, 15, w1); prog(W_BIAS1, 24, -500, 500, b1);
    prog(W_CONV2, 24*144, -15, 15, w2);    prog(W_BIAS2, 24, -500, 500, b2);
    prog(W_CONV3, 3*(IMGS/8)*(IMGS/8), -15, 15, w3); prog(W_BIAS3, 3, -500, 500, b3);
    for (int m = 0; m < 6; m++) prog(wsel_t'(int'(W_A1Q) + m), 24*24, -50, 50, aw[m]);
  endtask
  // random natural-looking frame: smooth ramps plus noise, plane-major
  task automatic make_frame(int seed);
    fr = new[3*IMGS*IMGS];
    for (int c = 0; c < 3; c++) for (int i = 0; i < IMGS; i++) for (int j = 0; j < IMGS; j++)
      fr[(c*IMGS + i)*IMGS + j] = ((i * (3 + seed) + j * (5 + c) + c * 40 + seed * 17) % 200) + int'($urandom % 48);
  endtask
  function automatic void compute_ref();
    ref_tokenizer(IMGS, fr, w1, b1, w2, b2, w3, b3, aw[0], aw[1], aw[2], aw[3], aw[4], aw[5],
                  SH1, SH2, SH3, PSH, OSH, SCM, tref);
  endfunction
  always @(posedge clk) if (done) ndone++;
  initial begin
    cfg = '{b1_shift: 6'(SH1), b2_shift: 6'(SH2), b3_shift: 6'(SH3), a_proj_shift: 6'(PSH), a_out_shift: 6'(OSH), a_scale_mul: 16'(SCM)};
    repeat (2) @(negedge clk); rst_n = 1;
    program_all();
    for (int f = 0; f < 2; f++) begin
      make_frame(f);
      compute_ref();
      @(negedge clk) frame_start = 1; @(negedge clk) frame_start = 0;
      for (int i = 0; i < IMGS * IMGS; i++) begin
        pix_valid = 1; pix_y = 8'(fr[i]); pix_cb = 8'(fr[IMGS*IMGS + i]); pix_cr = 8'(fr[2*IMGS*IMGS + i]);
        @(negedge clk);
      end
      pix_valid = 0;
      checks++; if (!frame_full) begin failures++; $display("frame_full low"); end
      ndone = 0;
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      $display("frame %0d tokenized in %0d cycles", f, cyc);
      @(negedge clk);
      checks++; if (ndone != 1) begin failures++; $display("done pulses %0d", ndone); end
      for (int a = 0; a < NT * D_TOK; a++) begin
        tok_addr = ($clog2(NT*D_TOK))'(a); #1;
        checks++;
        if ($signed(tok_data) != tref[a]) begin failures++; if (failures < 10) $display("tok %0d got %0d exp %0d", a, $signed(tok_data), tref[a]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (3000000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

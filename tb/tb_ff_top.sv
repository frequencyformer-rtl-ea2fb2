// tb_ff_top: end-to-end test of the whole pipeline on a 64x64 frame with two
// lanes. RGB pixels stream in; the tokens are computed on the sensor side,
// packed, serialised, sent through an analog channel model (lane swing +-A/2
// with Gaussian noise per sample) into one behavioural integrating receiver
// per lane (8 samples per bit, integrate half a bit), then deserialised,
// merged and checked on the processor side. The received bytes are compared
// with the reference tokenizer applied to the BT.601 YCbCr of the frame.
// Frame 0 is clean; in frame 1 one payload bit is flipped on the channel and
// the receiver must report a CRC error with a good header.
// Mechanisms counted (each must occur at least once): frame stored,
// tokenizer done, HS burst, sync lock on every lane, header accepted,
// payload written, CRC good, CRC error detected, both lanes carrying data.
// The pipeline order follows the paper; the channel model, noise level and
// reduced size are the test's own.
module tb_ff_top;
  import ff_pkg::*;
  import ff_ref_pkg::*;
  localparam int IMGS = 64, LANES = 2, TS = IMGS / 32, WC = TS * TS * D_TOK;
  localparam real A = 0.2, SIG = 0.03;
  logic clk = 0, clk_os = 0, rst_n = 0, ir_rst_n = 0;
  always #16 clk = ~clk;
  initial begin #1; forever #2 clk_os = ~clk_os; end   // 8 samples per bit, edges never on clk edges
  logic frame_start = 0, pix_valid = 0, w_we = 0, tok_done, hs_active, rx_hs_active = 0;
  logic [7:0] pix_r, pix_g, pix_b;
  wsel_t w_sel; logic [15:0] w_addr, w_data; tok_cfg_t cfg;
  logic [LANES-1:0] lane_d, rx_lane_d, dec;
  logic rx_tok_we, rx_pkt_done, rx_hdr_ok, rx_crc_ok;
  logic [$clog2(WC)-1:0] rx_tok_addr; logic [7:0] rx_tok_data;
  ff_top #(.IMGS(IMGS), .LANES(LANES)) dut (.clk, .rst_n, .frame_start, .pix_valid, .pix_r, .pix_g, .pix_b,
    .w_we, .w_sel, .w_addr, .w_data, .cfg, .tok_done, .hs_active, .lane_d, .rx_hs_active, .rx_lane_d,
    .rx_tok_we, .rx_tok_addr, .rx_tok_data, .rx_pkt_done, .rx_hdr_ok, .rx_crc_ok);
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

  // ---- channel and receiver front-ends ----
  real vin [LANES];
  int flip_at, bitno;
  logic [LANES-1:0] dv;
  for (genvar l = 0; l < LANES; l++) begin : g_ch
    ir_frontend #(.OSR(8)) u_ir (.clk_os, .rst_n(ir_rst_n), .vin(vin[l]), .vref(0.0), .cmp_noise(0.01),
                                 .dout(dec[l]), .dout_valid(dv[l]));
  end
  function automatic real gauss();
    real s; s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom % 65536) / 65536.0;
    return s - 6.0;
  endfunction
  always @(negedge clk_os) for (int l = 0; l < LANES; l++) begin
    logic b;
    b = lane_d[l] ^ (l == 0 && bitno == flip_at && hs_active);
    vin[l] = (b ? A / 2 : -A / 2) + SIG * gauss();
  end
  // decided bits are ready before the next clk edge: one cycle of latency
  assign rx_lane_d = dec;
  always @(posedge clk) begin
    rx_hs_active <= hs_active;
    bitno <= hs_active ? bitno + 1 : 0;
  end

  // ---- mechanism counters ----
  int n_full, n_tokdone, n_burst, n_lock, n_hdr, n_pay, n_crcok, n_crcerr, n_lane1, n_pkt;
  logic hs_q = 0, lk_q = 0;
  logic [7:0] rxbuf [WC];
  always @(posedge clk) if (rst_n) begin
    hs_q <= hs_active; lk_q <= dut.u_prx.locked;
    if (hs_active && !hs_q) n_burst++;
    if (dut.u_prx.locked && !lk_q) n_lock++;
    if (tok_done) n_tokdone++;
    if (rx_tok_we) begin n_pay++; rxbuf[rx_tok_addr] <= rx_tok_data; end
    if (hs_active && lane_d[1]) n_lane1++;
    if (rx_pkt_done) begin
      n_pkt++;
      if (rx_hdr_ok) n_hdr++;
      if (rx_crc_ok) n_crcok++; else n_crcerr++;
    end
  end

  int checks = 0, failures = 0, yy, cb, cr, rr, gg, bb;
  function automatic int clip8(int v); return (v < 0) ? 0 : (v > 255) ? 255 : v; endfunction
  task automatic chk(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  int rgb[];
  initial begin
    n_full = 0; n_tokdone = 0; n_burst = 0; n_lock = 0; n_hdr = 0; n_pay = 0; n_crcok = 0; n_crcerr = 0; n_lane1 = 0; n_pkt = 0;
    flip_at = -1; bitno = 0;
    for (int l = 0; l < LANES; l++) vin[l] = 0.0;
    cfg = '{b1_shift: 6'(SH1), b2_shift: 6'(SH2), b3_shift: 6'(SH3), a_proj_shift: 6'(PSH), a_out_shift: 6'(OSH), a_scale_mul: 16'(SCM)};
    repeat (2) @(negedge clk); rst_n = 1;
    @(posedge clk); #0 ir_rst_n = 1;   // integrator phase 0 starts right after a clk edge
    program_all();
    rgb = new[3*IMGS*IMGS]; fr = new[3*IMGS*IMGS];
    for (int f = 0; f < 2; f++) begin
      // RGB frame and its BT.601 YCbCr (same fixed-point formula as the converter)
      for (int i = 0; i < IMGS*IMGS; i++) begin
        rr = ((i / IMGS) * (2 + f) + 30 * f + int'($urandom % 40)) % 256;
        gg = ((i % IMGS) * 3 + 60 + int'($urandom % 40)) % 256;
        bb = (((i / IMGS) + (i % IMGS)) * 2 + int'($urandom % 40)) % 256;
        rgb[i] = rr; rgb[IMGS*IMGS + i] = gg; rgb[2*IMGS*IMGS + i] = bb;
        fr[i] = clip8((77 * rr + 150 * gg + 29 * bb + 128) >>> 8);
        fr[IMGS*IMGS + i] = clip8((-43 * rr - 85 * gg + 128 * bb + 32768 + 128) >>> 8);
        fr[2*IMGS*IMGS + i] = clip8((128 * rr - 107 * gg - 21 * bb + 32768 + 128) >>> 8);
      end
      compute_ref();
      flip_at = (f == 1) ? 8 * (1 + 20) + 3 : -1;   // a payload bit of lane 0
      @(negedge clk) frame_start = 1; @(negedge clk) frame_start = 0;
      for (int i = 0; i < IMGS*IMGS; i++) begin
        pix_valid = 1; pix_r = 8'(rgb[i]); pix_g = 8'(rgb[IMGS*IMGS + i]); pix_b = 8'(rgb[2*IMGS*IMGS + i]);
        @(negedge clk);
      end
      pix_valid = 0;
      @(negedge clk); @(negedge clk);
      if (dut.u_tok.frame_full) n_full++;
      wait (rx_pkt_done); @(negedge clk);
      if (f == 0) begin
        chk(rx_hdr_ok && rx_crc_ok, "clean frame: header and CRC");
        for (int a = 0; a < WC; a++) begin
          checks++;
          if ($signed(rxbuf[a]) != tref[a]) begin failures++; if (failures < 40) $display("byte %0d got %0d exp %0d", a, $signed(rxbuf[a]), tref[a]); end
        end
      end else begin
        chk(rx_hdr_ok && !rx_crc_ok, "corrupted frame: CRC error flagged");
      end
      repeat (20) @(negedge clk);
    end
    $display("mechanisms: full=%0d tokdone=%0d bursts=%0d lock=%0d hdr=%0d payload=%0d crc_ok=%0d crc_err=%0d lane1=%0d pkts=%0d",
             n_full, n_tokdone, n_burst, n_lock, n_hdr, n_pay, n_crcok, n_crcerr, n_lane1, n_pkt);
    chk(n_full == 2, "frame stored");
    chk(n_tokdone == 2, "tokenizer done");
    chk(n_burst == 2, "HS bursts");
    chk(n_lock == 2, "sync lock");
    chk(n_hdr == 2, "header accepted");
    chk(n_pay == 2 * WC, "payload written");
    chk(n_crcok == 1, "CRC good");
    chk(n_crcerr == 1, "CRC error detected");
    chk(n_lane1 > 0, "second lane used");
    chk(n_pkt == 2, "packets");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (400000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

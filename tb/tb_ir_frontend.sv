// tb_ir_frontend: exercises the behavioural integrating receiver model.
// Random bits are sent as +-A/2 around vref, one bit per OSR clk_os cycles.
//  1. No noise: every decided bit must equal the sent bit, one decision per bit (+-1 at the window edges),
//     decided at the half-bit point (OSR/2 samples after the bit start).
//  2. Channel noise (sigma = A/2 per sample): the integrating receiver
//     (OSR = 8, 4 samples averaged) must reach a clearly lower bit error rate
//     than a receiver that decides on one sample (OSR = 2); expected about
//     2 % against 16 %.
//  3. Comparator noise only: still error-free when sigma is far below the
//     integrated signal.
// Half-bit integration before the comparator follows the paper; the noise
// figures are the test's.
module tb_ir_frontend;
  localparam real A = 0.1;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  real vin8, vin2, noise_ch, cmp8, cmp2;
  logic d8, v8, d2, v2;
  ir_frontend #(.OSR(8)) u8 (.clk_os(clk), .rst_n, .vin(vin8), .vref(0.0), .cmp_noise(cmp8), .dout(d8), .dout_valid(v8));
  ir_frontend #(.OSR(2)) u2 (.clk_os(clk), .rst_n, .vin(vin2), .vref(0.0), .cmp_noise(cmp2), .dout(d2), .dout_valid(v2));
  int checks = 0, failures = 0;
  int cyc, phase, nb8, nb2, err8, err2, dec8, dec2;
  logic b8, b2;
  function automatic real gauss();
    real s; s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom % 65536) / 65536.0;
    return s - 6.0;
  endfunction
  // drivers: new bit at each bit boundary, noise redrawn every sample
  always @(negedge clk) if (rst_n) begin
    if (cyc % 8 == 0) b8 = 1'($urandom);
    if (cyc % 2 == 0) b2 = 1'($urandom);
    vin8 = (b8 ? A / 2 : -A / 2) + noise_ch * gauss();
    vin2 = (b2 ? A / 2 : -A / 2) + noise_ch * gauss();
  end
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (v8) begin
      dec8++;
      if (d8 != b8) err8++;
      if (phase != 3) begin checks++; if (cyc % 8 != 4) begin failures++; $display("decision at phase %0d", cyc % 8); end end
    end
    if (v2) begin dec2++; if (d2 != b2) err2++; end
  end
  task automatic run(int nbits, real nch, real nc8, real nc2);
    noise_ch = nch; cmp8 = nc8; cmp2 = nc2; err8 = 0; err2 = 0; dec8 = 0; dec2 = 0;
    repeat (nbits * 8) @(posedge clk);
  endtask
  initial begin
    cyc = 0; phase = 0; noise_ch = 0.0; cmp8 = 0.0; cmp2 = 0.0; vin8 = 0.0; vin2 = 0.0; b8 = 0; b2 = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(500, 0.0, 0.0, 0.0);
    checks++; if (err8 != 0 || err2 != 0) begin failures++; $display("noiseless errors %0d %0d", err8, err2); end
    checks++; if (dec8 < 499 || dec8 > 500 || dec2 < 1999 || dec2 > 2000) begin failures++; $display("decisions %0d %0d", dec8, dec2); end
    phase = 1;
    run(4000, A / 2, 0.0, 0.0);
    $display("channel noise: BER integrating=%0d/%0d single-sample=%0d/%0d", err8, dec8, err2, dec2);
    checks++; if (err8 * dec2 * 4 > err2 * dec8) begin failures++; $display("integration gives no gain"); end
    checks++; if (err2 * 100 < dec2 * 8) begin failures++; $display("single-sample BER implausibly low"); end
    run(1000, 0.0, A / 20, A / 20);
    checks++; if (err8 != 0) begin failures++; $display("comparator noise errors %0d", err8); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

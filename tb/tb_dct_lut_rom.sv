// tb_dct_lut_rom: checks the ROM of the 8-point basis (5 rows, t = 4) against
// the cosine formula with per-row symmetric quantisation, the bit widths
// 8,7,6,5,4 of the five harmonic rows, and the sub-LUT entries {0,c,2c,3c}.
// The bit schedule and row-wise quantisation follow the paper; the sub-LUT
// layout is this design's.
module tb_dct_lut_rom;
  localparam int N = 8, R = 5, P = 4;
  logic [2:0] row; logic [3:0] base;
  logic signed [9:0] lut [P][4];
  logic [4:0] bits;
  int checks = 0, failures = 0;
  dct_lut_rom #(.N(N), .R(R), .T(4), .P(P), .LW(10)) dut (.*);
  initial begin
    int expb [5] = '{8, 7, 6, 5, 4};
    real mx, c, q; int e;
    for (int k = 0; k < R; k++) begin
      mx = 0;
      for (int i = 0; i < N; i++) begin c = $cos(3.141592653589793 * (2*i+1) * k / 16.0); if (c < 0) c = -c; if (c > mx) mx = c; end
      for (int b0 = 0; b0 < N; b0 += P) begin
        row = 3'(k); base = 4'(b0); #1;
        checks++; if (int'(bits) != expb[k]) begin failures++; $display("bits k=%0d %0d", k, bits); end
        for (int p = 0; p < P; p++) begin
          q = $cos(3.141592653589793 * (2*(b0+p)+1) * k / 16.0) / mx * ((1 << (expb[k]-1)) - 1);
          e = $rtoi(q >= 0 ? q + 0.5 : q - 0.5);
          for (int m = 0; m < 4; m++) begin
            checks++;
            if (int'(lut[p][m]) != m * e) begin failures++; $display("k=%0d i=%0d m=%0d got %0d exp %0d", k, b0+p, m, lut[p][m], m*e); end
          end
        end
      end
    end
    // DC row is flat at full INT8 scale
    row = 0; base = 0; #1; checks++; if (lut[0][1] != 127) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

// dphy_tx_check: drives one dphy_tx instance with two packets of NB random
// bytes (source always valid) and checks the serial lanes against the
// expected sync + round-robin byte pattern and burst length.
// The serial format is this design's D-PHY-like choice.
module dphy_tx_check #(parameter int LANES = 2, parameter int NB = 13) (
  input logic clk, input logic rst_n, output int checks, output int failures, output logic fin);
  logic in_valid = 0, in_ready, in_last, hs_active;
  logic [7:0] in_byte; logic [LANES-1:0] lane_d;
  logic [7:0] pkt [NB];
  int idx, nbits, ngrp, b, ev;
  dphy_tx #(.LANES(LANES)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_byte, .in_last, .hs_active, .lane_d);
  assign in_byte = (idx < NB) ? pkt[idx] : 8'd0;
  assign in_last = (idx == NB - 1);
  // source
  always @(posedge clk) if (in_valid && in_ready) begin
    idx <= idx + 1;
    if (idx == NB - 1) in_valid <= 1'b0;
  end
  initial begin
    checks = 0; failures = 0; fin = 0; idx = 0;
    ngrp = (NB + LANES - 1) / LANES;
    @(posedge rst_n);
    for (int pk = 0; pk < 2; pk++) begin
      for (int i = 0; i < NB; i++) pkt[i] = 8'($urandom);
      @(negedge clk); idx = 0; in_valid = 1;
      wait (hs_active); @(negedge clk);
      nbits = 0;
      while (hs_active) begin
        for (int l = 0; l < LANES; l++) begin
          if (nbits < 8) ev = (8'hB8 >> nbits) & 1;
          else begin
            b = ((nbits / 8) - 1) * LANES + l;
            ev = (b < NB) ? (pkt[b] >> (nbits % 8)) & 1 : 0;
          end
          checks++;
          if (int'(lane_d[l]) != ev) begin failures++; if (failures < 10) $display("L=%0d bit %0d lane %0d got %0d exp %0d", LANES, nbits, l, lane_d[l], ev); end
        end
        nbits++;
        @(negedge clk);
      end
      checks++; if (nbits != 8 * (1 + ngrp)) begin failures++; $display("L=%0d burst %0d bits", LANES, nbits); end
      repeat (5) @(negedge clk);
    end
    fin = 1;
  end
endmodule

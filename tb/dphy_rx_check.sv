// dphy_rx_check: drives one dphy_rx instance with serial lane bits: a random
// number of HS-zero bits, the sync byte 0xB8 on every lane, then NB random
// bytes distributed round-robin over the lanes (LSB first), then hs_active
// low. Checks lock, the merged byte order, the byte count, and that random
// data sent without sync (hs_active low) produces no output.
// The serial format is this design's D-PHY-like choice.
module dphy_rx_check #(parameter int LANES = 2, parameter int NB = 16) (
  input logic clk, input logic rst_n, output int checks, output int failures, output logic fin);
  logic hs_active = 0, locked, active, out_valid; logic [LANES-1:0] lane_d = '0; logic [7:0] out_byte;
  logic [7:0] pkt [NB];
  int ngot, ngrp, b, lead;
  logic was_locked;
  dphy_rx #(.LANES(LANES)) dut (.clk, .rst_n, .hs_active, .lane_d, .locked, .active, .out_valid, .out_byte);
  always @(posedge clk) if (locked) was_locked <= 1'b1;
  always @(posedge clk) if (rst_n && out_valid && !active) begin failures++; $display("byte outside active"); end
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (ngot >= NB || out_byte != pkt[ngot]) begin
      failures++; if (failures < 10) $display("L=%0d byte %0d got %0h", LANES, ngot, out_byte);
    end
    ngot++;
  end
  initial begin
    checks = 0; failures = 0; fin = 0; ngot = 0; was_locked = 0;
    ngrp = (NB + LANES - 1) / LANES;
    @(posedge rst_n);
    // line noise while the link is idle: must be ignored
    for (int i = 0; i < 50; i++) begin @(negedge clk); lane_d = LANES'($urandom); end
    for (int pk = 0; pk < 2; pk++) begin
      for (int i = 0; i < NB; i++) pkt[i] = 8'($urandom);
      ngot = 0; was_locked = 0;
      @(negedge clk); hs_active = 1; lane_d = '0;
      lead = 3 + $urandom % 10;
      repeat (lead) @(negedge clk);
      for (int i = 0; i < 8; i++) begin lane_d = {LANES{1'((8'hB8 >> i) & 1)}}; @(negedge clk); end
      for (int g = 0; g < ngrp; g++) for (int i = 0; i < 8; i++) begin
        for (int l = 0; l < LANES; l++) begin
          b = g * LANES + l;
          lane_d[l] = (b < NB) ? pkt[b][i] : 1'b0;
        end
        @(negedge clk);
      end
      hs_active = 0; lane_d = '0;
      repeat (LANES + 4) @(negedge clk);
      checks++; if (active) begin failures++; $display("active stuck"); end
      checks++; if (!was_locked) begin failures++; $display("no lock"); end
      // padding bytes of the last group are delivered too; only NB are real
      checks++; if (ngot != ngrp * LANES) begin failures++; $display("L=%0d count %0d", LANES, ngot); end
    end
    fin = 1;
  end
endmodule

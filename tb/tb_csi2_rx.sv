// tb_csi2_rx: feeds csi2_rx with byte packets (random gaps in in_valid,
// lane_idle between packets): good packets, packets with one payload byte
// flipped, with a corrupted header check byte, and with a bad CRC byte.
// Checks the payload writes (address and data), wc, hdr_ok, crc_ok and one
// pkt_done per packet, and that trailing bytes after a packet are ignored.
// The packet format checked is this design's CSI-2-like choice.
module tb_csi2_rx;
  import ff_ref_pkg::*;
  localparam int WC = 29;
  logic clk = 0, rst_n = 0, lane_idle = 1, in_valid = 0, pay_we, pkt_done, hdr_ok, crc_ok;
  logic [7:0] in_byte, pay_data; logic [$clog2(WC)-1:0] pay_addr; logic [15:0] wc;
  logic [7:0] pkt [WC+6];
  logic [7:0] got [WC];
  int checks = 0, failures = 0, crc, ndone, nwr, mode;
  always #5 clk = ~clk;
  csi2_rx #(.WC_MAX(WC)) dut (.clk, .rst_n, .lane_idle, .in_valid, .in_byte, .pay_we, .pay_addr, .pay_data, .pkt_done, .hdr_ok, .crc_ok, .wc);
  always @(posedge clk) begin
    if (pay_we) begin got[pay_addr] <= pay_data; nwr <= nwr + 1; end
    if (pkt_done) ndone <= ndone + 1;
  end
  task automatic chk(int g, int e, string what);
    checks++; if (g != e) begin failures++; $display("mode %0d %s got %0d exp %0d", mode, what, g, e); end
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      mode = t % 4; // 0 good, 1 payload flip, 2 header check wrong, 3 CRC byte wrong
      crc = 'hFFFF;
      pkt[0] = 8'h2A; pkt[1] = 8'(WC); pkt[2] = 8'(WC >> 8); pkt[3] = pkt[0] ^ pkt[1] ^ pkt[2];
      for (int i = 0; i < WC; i++) begin pkt[4 + i] = 8'($urandom); crc = crc16_byte(crc, pkt[4 + i]); end
      pkt[WC + 4] = 8'(crc); pkt[WC + 5] = 8'(crc >> 8);
      if (mode == 1) pkt[4 + $urandom % WC] ^= 8'(1 << ($urandom % 8));
      if (mode == 2) pkt[3] ^= 8'h10;
      if (mode == 3) pkt[WC + 5] ^= 8'h01;
      ndone = 0; nwr = 0;
      @(negedge clk) lane_idle = 0;
      for (int i = 0; i < WC + 6 + 3; i++) begin
        while (($urandom % 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_byte = (i < WC + 6) ? pkt[i] : 8'($urandom);
        @(negedge clk);
      end
      in_valid = 0; repeat (3) @(negedge clk);
      chk(ndone, 1, "pkt_done count");
      chk(nwr, WC, "payload writes");
      chk(int'(wc), WC, "wc");
      chk(int'(hdr_ok), int'(mode != 2), "hdr_ok");
      chk(int'(crc_ok), int'(mode == 0 || mode == 2), "crc_ok");
      for (int i = 0; i < WC; i++) chk(int'(got[i]), int'(pkt[4 + i]), "payload");
      lane_idle = 1; repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

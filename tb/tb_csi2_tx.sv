// tb_csi2_tx: sends packets of a random payload through csi2_tx with random
// backpressure and checks every byte of the stream (header, check byte,
// payload, CRC-16 computed by the reference), out_last on the final byte and
// the packet length. A second packet with ready held high checks the timing
// of WC+6 cycles from start to the end of busy.
// The packet format checked is this design's CSI-2-like choice; the payload size
// is reduced for the test.
module tb_csi2_tx;
  import ff_ref_pkg::*;
  localparam int WC = 37;
  logic clk = 0, rst_n = 0, start = 0, busy, out_valid, out_ready = 0, out_last;
  logic [$clog2(WC)-1:0] rd_addr; logic [7:0] rd_data, out_byte;
  logic [7:0] mem [WC];
  int exp_b [WC+6];
  int checks = 0, failures = 0, n, crc, cyc;
  always #5 clk = ~clk;
  assign rd_data = mem[rd_addr];
  csi2_tx #(.WC(WC), .DI(8'h2A)) dut (.clk, .rst_n, .start, .busy, .rd_addr, .rd_data, .out_valid, .out_ready, .out_byte, .out_last);
  task automatic chk(int got, int exp, string what);
    checks++; if (got != exp) begin failures++; $display("%s got %0h exp %0h", what, got, exp); end
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int pk = 0; pk < 3; pk++) begin
      crc = 'hFFFF;
      for (int i = 0; i < WC; i++) begin mem[i] = 8'($urandom); crc = crc16_byte(crc, mem[i]); end
      exp_b[0] = 'h2A; exp_b[1] = WC & 255; exp_b[2] = WC >> 8; exp_b[3] = 'h2A ^ (WC & 255) ^ (WC >> 8);
      for (int i = 0; i < WC; i++) exp_b[4 + i] = mem[i];
      exp_b[WC + 4] = crc & 255; exp_b[WC + 5] = crc >> 8;
      @(negedge clk) start = 1; @(negedge clk) start = 0;
      n = 0; cyc = 0;
      while (busy) begin
        out_ready = (pk == 2) ? 1'b1 : 1'(($urandom % 3) != 0);
        #1;
        if (out_valid && out_ready) begin
          if (n < WC + 6) chk(int'(out_byte), exp_b[n], "byte");
          chk(int'(out_last), int'(n == WC + 5), "last");
          n++;
        end
        @(negedge clk); cyc++;
      end
      chk(n, WC + 6, "count");
      if (pk == 2) chk(cyc, WC + 6, "cycles");
      out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

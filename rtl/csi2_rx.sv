// csi2_rx: packet parser of the link receiver.
//
// Consumes the merged byte stream from dphy_rx. Reads the 4-byte header
// (data identifier, word count low/high, check byte), checks the header,
// writes the WC payload bytes to the token store through pay_we/pay_addr/
// pay_data, recomputes CRC-16/CCITT (reflected 0x8408, seed 0xFFFF) and
// compares it with the two trailing bytes. pkt_done pulses after the CRC with
// hdr_ok and crc_ok valid; extra bytes are ignored until lane_idle (the link
// back in its idle state) re-arms the parser.
// Mirrors csi2_tx; the header check and framing are this design's choices.
module csi2_rx #(
  parameter int WC_MAX = 1176
) (
  input  logic clk,
  input  logic rst_n,
  input  logic lane_idle,
  input  logic in_valid,
  input  logic [7:0] in_byte,
  output logic pay_we,
  output logic [$clog2(WC_MAX)-1:0] pay_addr,
  output logic [7:0] pay_data,
  output logic pkt_done,
  output logic hdr_ok,
  output logic crc_ok,
  output logic [15:0] wc
);
  typedef enum logic [2:0] {R_HDR, R_PAY, R_CRC, R_DONE} rstate_t;
  rstate_t st;
  logic [1:0] hc;
  logic [7:0] hdr [3];
  logic [15:0] cnt, crc;
  logic [7:0] rcrc;
  logic cc;

  function automatic logic [15:0] crc_byte(logic [15:0] c, logic [7:0] b);
    logic [15:0] r;
    r = c;
    for (int i = 0; i < 8; i++) r = ((r[0] ^ b[i]) != 1'b0) ? ((r >> 1) ^ 16'h8408) : (r >> 1);
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= R_HDR; hc <= '0; cnt <= '0; crc <= 16'hFFFF; rcrc <= '0; cc <= 1'b0;
      pay_we <= 1'b0; pay_addr <= '0; pay_data <= '0; pkt_done <= 1'b0; hdr_ok <= 1'b0; crc_ok <= 1'b0; wc <= '0;
      for (int i = 0; i < 3; i++) hdr[i] <= '0;
    end else begin
      pay_we <= 1'b0; pkt_done <= 1'b0;
      if (lane_idle) begin
        st <= R_HDR; hc <= '0;
      end else if (in_valid) begin
        unique case (st)
          R_HDR: begin
            if (hc == 2'd3) begin
              hdr_ok <= ((hdr[0] ^ hdr[1] ^ hdr[2]) == in_byte) && ({hdr[2], hdr[1]} <= 16'(WC_MAX));
              wc <= {hdr[2], hdr[1]};
              cnt <= '0; crc <= 16'hFFFF; hc <= '0;
              st <= ({hdr[2], hdr[1]} == 16'd0) ? R_CRC : R_PAY;
              cc <= 1'b0;
            end else begin
              hdr[hc] <= in_byte; hc <= hc + 1'b1;
            end
          end
          R_PAY: begin
            pay_we <= (cnt < 16'(WC_MAX));
            pay_addr <= $clog2(WC_MAX)'(cnt);
            pay_data <= in_byte;
            crc <= crc_byte(crc, in_byte);
            cnt <= cnt + 1'b1;
            if (cnt + 1'b1 == wc) st <= R_CRC;
          end
          R_CRC: begin
            if (!cc) begin rcrc <= in_byte; cc <= 1'b1; end
            else begin
              crc_ok <= ({in_byte, rcrc} == crc);
              pkt_done <= 1'b1; st <= R_DONE;
            end
          end
          default: ;
        endcase
      end
    end
  end
endmodule

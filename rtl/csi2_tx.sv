// csi2_tx: packet layer of the sensor-side link transmitter.
//
// Packs the INT8 token map of one frame into one long packet and hands it out
// as a byte stream (valid/ready, last on the final byte):
//   DI (data identifier), WC[7:0], WC[15:8], header check = DI ^ WC lo ^ WC hi,
//   WC payload bytes read from the token store (rd_addr -> rd_data, same
//   cycle), CRC-16 low byte, CRC-16 high byte.
// The CRC is CRC-16/CCITT (polynomial x^16+x^12+x^5+1, reflected, seed
// 0xFFFF) over the payload. Each token element is one byte, so the pixel to
// byte packing is the identity for 8-bit data.
// Timing: WC+6 bytes, one per cycle while ready is high.
// A packet based low-level protocol over a MIPI-style link follows the
// interface description; the header check byte (instead of the 6-bit
// Hamming ECC of CSI-2), the data identifier and the single-packet framing
// are this design's choices.
module csi2_tx #(
  parameter int WC = 1176,
  parameter logic [7:0] DI = 8'h2A
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic busy,
  output logic [$clog2(WC)-1:0] rd_addr,
  input  logic [7:0] rd_data,
  output logic out_valid,
  input  logic out_ready,
  output logic [7:0] out_byte,
  output logic out_last
);
  localparam int TOTAL = WC + 6;
  logic [$clog2(TOTAL+1)-1:0] idx;
  logic [15:0] crc;
  localparam logic [7:0] WCL = WC[7:0];
  localparam logic [7:0] WCH = WC[15:8];

  function automatic logic [15:0] crc_byte(logic [15:0] c, logic [7:0] b);
    logic [15:0] r;
    r = c;
    for (int i = 0; i < 8; i++) r = ((r[0] ^ b[i]) != 1'b0) ? ((r >> 1) ^ 16'h8408) : (r >> 1);
    return r;
  endfunction

  assign rd_addr = $clog2(WC)'((int'(idx) >= 4 && int'(idx) < WC + 4) ? int'(idx) - 4 : 0);
  always_comb begin
    if (int'(idx) == 0)           out_byte = DI;
    else if (int'(idx) == 1)      out_byte = WCL;
    else if (int'(idx) == 2)      out_byte = WCH;
    else if (int'(idx) == 3)      out_byte = DI ^ WCL ^ WCH;
    else if (int'(idx) < WC + 4)  out_byte = rd_data;
    else if (int'(idx) == WC + 4) out_byte = crc[7:0];
    else                          out_byte = crc[15:8];
  end
  assign out_valid = busy;
  assign out_last  = busy && (int'(idx) == TOTAL - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; idx <= '0; crc <= 16'hFFFF;
    end else if (!busy) begin
      if (start) begin busy <= 1'b1; idx <= '0; crc <= 16'hFFFF; end
    end else if (out_ready) begin
      if (int'(idx) >= 4 && int'(idx) < WC + 4) crc <= crc_byte(crc, rd_data);
      if (int'(idx) == TOTAL - 1) busy <= 1'b0;
      else idx <= idx + 1'b1;
    end
  end
endmodule

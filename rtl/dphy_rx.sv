// dphy_rx: receiver-side deserialiser and lane merger of the link.
//
// Works on the bits decided by the integrating receiver front-ends, one bit per
// lane per cycle. While hs_active is high and the lanes are not yet locked,
// each lane shifts its bits into an 8-bit window (LSB first); when every lane
// shows the sync byte 0xB8 the lanes lock to the byte boundary. From then on
// every 8 cycles each lane yields one byte and the bytes are handed out in
// lane order (lane 0 first), one per cycle, on out_valid/out_byte, which
// reverses the transmitter's lane distribution. Dropping hs_active unlocks.
// active stays high until the last byte of a burst has been handed out (the
// final lane group is emitted after hs_active has already fallen); the
// packet layer uses its fall as the end-of-transmission marker.
// Sync search, deserialisation and lane merging follow the layered MIPI
// receiver; the rest is this design's choice.
module dphy_rx #(
  parameter int LANES = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic hs_active,
  input  logic [LANES-1:0] lane_d,
  output logic locked,
  output logic active,
  output logic out_valid,
  output logic [7:0] out_byte
);
  logic [7:0] win [LANES];
  logic [7:0] hold [LANES];
  logic [2:0] bitc;
  logic [$clog2(LANES+1)-1:0] emit;
  logic all_sync;
  assign active = hs_active || (emit != 0) || out_valid;
  always_comb begin
    all_sync = 1'b1;
    for (int l = 0; l < LANES; l++) if ({lane_d[l], win[l][7:1]} != 8'hB8) all_sync = 1'b0;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked <= 1'b0; bitc <= '0; emit <= '0; out_valid <= 1'b0; out_byte <= '0;
      for (int l = 0; l < LANES; l++) begin win[l] <= '0; hold[l] <= '0; end
    end else begin
      out_valid <= 1'b0;
      for (int l = 0; l < LANES; l++) win[l] <= {lane_d[l], win[l][7:1]};
      if (!hs_active) begin
        locked <= 1'b0; bitc <= '0; emit <= '0;
      end else if (!locked) begin
        if (all_sync) begin locked <= 1'b1; bitc <= '0; end
      end else begin
        bitc <= bitc + 1'b1;
        if (bitc == 3'd7) begin
          for (int l = 0; l < LANES; l++) hold[l] <= {lane_d[l], win[l][7:1]};
          emit <= ($clog2(LANES+1))'(LANES);
        end
      end
      if (emit != 0) begin
        out_valid <= 1'b1;
        out_byte <= hold[LANES - int'(emit)];
        emit <= emit - 1'b1;
      end
    end
  end
endmodule

// dphy_tx: lane management and high-speed serialiser of the link transmitter.
//
// Takes the packet byte stream and spreads it over LANES data lanes, byte i
// of the packet on lane i mod LANES. Each burst starts with the sync byte
// 0xB8 on every lane, then every lane shifts out one byte per 8 cycles,
// least significant bit first, one bit per cycle on lane_d; a final partial
// group of bytes is padded with zeros. hs_active is high for the whole burst
// and marks the high-speed state; between bursts the lanes idle at 0. While
// one group of LANES bytes shifts out, the next group is collected (ready is
// high while there is room), so the burst has no gaps if the source keeps up.
// The bit clock is the forwarded clock lane; one bit per clock edge of a DDR
// link is modelled here as one bit per cycle.
// Lane distribution, serialisation and start-of-transmission sync follow the
// layered MIPI interface; the sync value and LSB-first order are those of the
// MIPI D-PHY, the padding rule is this design's simplification.
module dphy_tx #(
  parameter int LANES = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  logic [7:0] in_byte,
  input  logic in_last,
  output logic hs_active,
  output logic [LANES-1:0] lane_d
);
  typedef enum logic [1:0] {T_IDLE, T_SYNC, T_DATA} tstate_t;
  tstate_t st;
  localparam int LW = $clog2(LANES + 1);
  localparam logic [7:0] SYNC = 8'hB8;
  logic [7:0] shreg [LANES];
  logic [7:0] nxt [LANES];
  logic [LW-1:0] ncnt;
  logic nxt_full, got_last, shreg_last;
  logic [2:0] bitc;

  assign in_ready = (st != T_IDLE) && !nxt_full && !got_last;
  assign hs_active = (st != T_IDLE);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      unique case (st)
        T_SYNC:  lane_d[l] = SYNC[bitc];
        T_DATA:  lane_d[l] = shreg[l][bitc];
        default: lane_d[l] = 1'b0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; ncnt <= '0; nxt_full <= 1'b0; got_last <= 1'b0; shreg_last <= 1'b0; bitc <= '0;
      for (int l = 0; l < LANES; l++) begin nxt[l] <= '0; shreg[l] <= '0; end
    end else begin
      // collect the next group
      if (in_valid && in_ready) begin
        nxt[ncnt] <= in_byte;
        if (int'(ncnt) == LANES - 1 || in_last) begin
          nxt_full <= 1'b1; ncnt <= '0;
          for (int l = 0; l < LANES; l++) if (l > int'(ncnt)) nxt[l] <= '0;
        end else ncnt <= ncnt + 1'b1;
        if (in_last) got_last <= 1'b1;
      end
      unique case (st)
        T_IDLE: if (in_valid) begin st <= T_SYNC; bitc <= '0; got_last <= 1'b0; end
        T_SYNC, T_DATA: begin
          bitc <= bitc + 1'b1;
          if (bitc == 3'd7) begin
            if (st == T_DATA && shreg_last) begin
              st <= T_IDLE; shreg_last <= 1'b0; got_last <= 1'b0;
            end else if (nxt_full || (in_valid && in_ready && (int'(ncnt) == LANES - 1 || in_last))) begin
              st <= T_DATA;
              for (int l = 0; l < LANES; l++)
                shreg[l] <= (nxt_full) ? nxt[l] : ((l == int'(ncnt)) ? in_byte : ((l < int'(ncnt)) ? nxt[l] : 8'd0));
              nxt_full <= 1'b0;
              shreg_last <= got_last || (in_valid && in_ready && in_last);
            end else begin
              st <= T_IDLE; // source underflow: end the burst
            end
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule

// ff_top: the frequency-domain tokenizer pipeline from pixels to received tokens.
//
// Sensor side: RGB pixels from the image sensor (raster order, one per cycle)
// are converted to YCbCr, stored, and tokenized by ff_tokenizer as soon as the
// frame is complete. The 7x7x24 INT8 token map (1176 bytes, 9408 bits) is then
// sent as one packet (csi2_tx) over LANES serial lanes (dphy_tx); the lane
// bits and hs_active are outputs toward the analog line drivers.
// Processor side: the lane bits decided by the integrating receiver
// front-ends come back in on rx_lane_d with rx_hs_active; dphy_rx re-aligns
// and merges them, csi2_rx checks the packet and writes the tokens out on
// rx_tok_we/rx_tok_addr/rx_tok_data for the backbone. The analog driver,
// channel and receiver front-end sit between lane_d and rx_lane_d.
// Weight programming (w_*) and requantisation settings (cfg) are written at
// deployment. tok_done pulses when a frame's tokens are ready on chip,
// rx_pkt_done with rx_crc_ok/rx_hdr_ok when they have been received.
// The partitioning (tokenizer plus link on the sensor side, backbone on the
// processor side) follows the pipeline description; the handshakes between
// the parts are this design's choices.
module ff_top
  import ff_pkg::*;
#(
  parameter int IMGS  = 224,
  parameter int LANES = 1,
  parameter int TS    = IMGS / 32,
  parameter int WC    = TS * TS * D_TOK
) (
  input  logic clk,
  input  logic rst_n,
  // image sensor
  input  logic frame_start,
  input  logic pix_valid,
  input  logic [7:0] pix_r, pix_g, pix_b,
  // deployment
  input  logic w_we,
  input  wsel_t w_sel,
  input  logic [15:0] w_addr,
  input  logic [15:0] w_data,
  input  tok_cfg_t cfg,
  output logic tok_done,
  // transmitter lanes
  output logic hs_active,
  output logic [LANES-1:0] lane_d,
  // receiver lanes (after the integrating front-ends)
  input  logic rx_hs_active,
  input  logic [LANES-1:0] rx_lane_d,
  output logic rx_tok_we,
  output logic [$clog2(WC)-1:0] rx_tok_addr,
  output logic [7:0] rx_tok_data,
  output logic rx_pkt_done,
  output logic rx_hdr_ok,
  output logic rx_crc_ok
);
  logic yv;
  logic [7:0] yy, ycb, ycr;
  rgb_to_ycbcr u_csc (.clk, .rst_n, .in_valid(pix_valid), .r(pix_r), .g(pix_g), .b(pix_b),
                      .out_valid(yv), .y(yy), .cb(ycb), .cr(ycr));

  logic frame_full, full_q, tk_busy;
  logic [$clog2(WC)-1:0] tok_addr;
  logic [7:0] tok_data;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) full_q <= 1'b0; else full_q <= frame_full;
  ff_tokenizer #(.IMGS(IMGS)) u_tok (
    .clk, .rst_n, .frame_start, .pix_valid(yv), .pix_y(yy), .pix_cb(ycb), .pix_cr(ycr),
    .frame_full, .w_we, .w_sel, .w_addr, .w_data, .cfg,
    .start(frame_full && !full_q), .busy(tk_busy), .done(tok_done), .tok_addr, .tok_data);

  logic tx_busy, bv, br, bl;
  logic [7:0] bb;
  csi2_tx #(.WC(WC)) u_ctx (.clk, .rst_n, .start(tok_done), .busy(tx_busy),
    .rd_addr(tok_addr), .rd_data(tok_data), .out_valid(bv), .out_ready(br), .out_byte(bb), .out_last(bl));
  dphy_tx #(.LANES(LANES)) u_ptx (.clk, .rst_n, .in_valid(bv), .in_ready(br), .in_byte(bb), .in_last(bl),
    .hs_active, .lane_d);

  logic locked, rx_act, rv;
  logic [7:0] rb;
  logic [15:0] rwc;
  dphy_rx #(.LANES(LANES)) u_prx (.clk, .rst_n, .hs_active(rx_hs_active), .lane_d(rx_lane_d),
    .locked, .active(rx_act), .out_valid(rv), .out_byte(rb));
  csi2_rx #(.WC_MAX(WC)) u_crx (.clk, .rst_n, .lane_idle(!rx_act), .in_valid(rv), .in_byte(rb),
    .pay_we(rx_tok_we), .pay_addr(rx_tok_addr), .pay_data(rx_tok_data),
    .pkt_done(rx_pkt_done), .hdr_ok(rx_hdr_ok), .crc_ok(rx_crc_ok), .wc(rwc));
  logic unused;
  assign unused = tk_busy ^ tx_busy ^ locked ^ (^rwc);
endmodule

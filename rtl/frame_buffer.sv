// frame_buffer: on-chip YCbCr frame store that serves block-shaped reads.
//
// Pixels arrive in raster order, one YCbCr triple per cycle with wr_valid;
// frame_start rewinds the write address and frame_full rises once IMG*IMG
// pixels have been stored. Three independent read ports, one per DCT branch,
// each return P consecutive rows (row .. row+P-1) of one column of one colour
// plane in the same cycle; this is how the "reshape and stack into b x b
// blocks" step is realised: a branch addresses its block by origin plus offset,
// no data is copied. Rows past the frame edge read as 0.
// The frame store itself is implied by the tokenizer (whole-image DCT needs the
// full frame); its organisation and port widths are this design's choices.
module frame_buffer #(
  parameter int IMG = 224,
  parameter int P1  = 8,
  parameter int P2  = 8,
  parameter int P3  = 28,
  parameter int AW  = $clog2(IMG)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic frame_start,
  input  logic wr_valid,
  input  logic [7:0] wr_y, wr_cb, wr_cr,
  output logic frame_full,
  input  logic [1:0] rd1_plane, input logic [AW-1:0] rd1_row, rd1_col, output logic [7:0] rd1_data [P1],
  input  logic [1:0] rd2_plane, input logic [AW-1:0] rd2_row, rd2_col, output logic [7:0] rd2_data [P2],
  input  logic [1:0] rd3_plane, input logic [AW-1:0] rd3_row, rd3_col, output logic [7:0] rd3_data [P3]
);
  logic [7:0] mem [3][IMG][IMG];
  logic [AW-1:0] wy, wx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wy <= '0; wx <= '0; frame_full <= 1'b0;
    end else if (frame_start) begin
      wy <= '0; wx <= '0; frame_full <= 1'b0;
    end else if (wr_valid && !frame_full) begin
      if (int'(wx) == IMG - 1) begin
        wx <= '0;
        if (int'(wy) == IMG - 1) begin wy <= '0; frame_full <= 1'b1; end
        else wy <= wy + 1'b1;
      end else wx <= wx + 1'b1;
    end
  end
  always_ff @(posedge clk) begin
    if (wr_valid && !frame_full && !frame_start) begin
      mem[0][wy][wx] <= wr_y;
      mem[1][wy][wx] <= wr_cb;
      mem[2][wy][wx] <= wr_cr;
    end
  end

  function automatic logic [7:0] rd(logic [1:0] pl, int row, logic [AW-1:0] col);
    if (row >= IMG || int'(col) >= IMG || pl > 2'd2) return 8'd0;
    return mem[pl][row][col];
  endfunction
  always_comb begin
    for (int p = 0; p < P1; p++) rd1_data[p] = rd(rd1_plane, int'(rd1_row) + p, rd1_col);
    for (int p = 0; p < P2; p++) rd2_data[p] = rd(rd2_plane, int'(rd2_row) + p, rd2_col);
    for (int p = 0; p < P3; p++) rd3_data[p] = rd(rd3_plane, int'(rd3_row) + p, rd3_col);
  end
endmodule

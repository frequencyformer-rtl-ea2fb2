// tb_dphy_tx: feeds byte packets to dphy_tx with 1, 2 and 3 lanes and checks
// the serial lanes bit by bit: hs_active rises, each lane sends the sync byte
// 0xB8 LSB first, then the bytes round-robin over the lanes (byte i on lane
// i mod LANES), the last group padded with zeros, then hs_active falls.
// Timing checked: 8 * (1 + ceil(NB/LANES)) bit cycles of hs_active.
// Sync byte, bit order and lane order are this design's D-PHY-like choices.
module tb_dphy_tx;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int c1, f1, c2, f2, c3, f3;
  logic d1, d2, d3;
  dphy_tx_check #(.LANES(1), .NB(13)) u1 (.clk, .rst_n, .checks(c1), .failures(f1), .fin(d1));
  dphy_tx_check #(.LANES(2), .NB(13)) u2 (.clk, .rst_n, .checks(c2), .failures(f2), .fin(d2));
  dphy_tx_check #(.LANES(3), .NB(20)) u3 (.clk, .rst_n, .checks(c3), .failures(f3), .fin(d3));
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    wait (d1 && d2 && d3);
    $display("TB_RESULT checks=%0d failures=%0d", c1 + c2 + c3, f1 + f2 + f3);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); $display("TB_RESULT checks=%0d failures=%0d", c1 + c2 + c3, f1 + f2 + f3 + 1); $finish; end
endmodule

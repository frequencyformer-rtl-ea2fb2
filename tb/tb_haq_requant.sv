// tb_haq_requant: random check of the rounding shift and symmetric clip
// against a direct integer computation, for every width 4..8 and shifts 0..12.
// Round-to-nearest and clipping follow the paper's quantiser; shift-based
// steps are this design's.
module tb_haq_requant;
  logic signed [31:0] din;
  logic [5:0] shift;
  logic [4:0] bits;
  logic signed [7:0] dout;
  int checks = 0, failures = 0;
  haq_requant #(.IW(32), .OW(8)) dut (.din, .shift, .bits, .dout);
  initial begin
    longint v, e, hi, lo;
    for (int t = 0; t < 5000; t++) begin
      din = 32'($urandom) >>> ($urandom % 24);
      shift = 6'($urandom % 13);
      bits = 5'(4 + $urandom % 5);
      #1;
      v = longint'(din);
      e = (shift == 0) ? v : ((v + (longint'(1) << (shift - 1))) >>> shift);
      hi = (longint'(1) << (bits - 1)) - 1; lo = -(longint'(1) << (bits - 1));
      if (e > hi) e = hi; if (e < lo) e = lo;
      checks++;
      if (longint'(dout) != e) begin failures++; $display("din=%0d sh=%0d b=%0d got %0d exp %0d", din, shift, bits, dout, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

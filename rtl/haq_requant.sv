// haq_requant: the "Q" requantiser of the tokenizer datapath.
//
// Divides a wide signed accumulator by 2^shift with round-half-up, then clips
// symmetrically to a signed b-bit range [-2^(b-1), 2^(b-1)-1], where both the
// shift and the target width b are run-time inputs (b changes per harmonic row
// under harmonic-aware quantisation). The result is sign-extended to OW bits.
// Purely combinational. Round-half-up and the clip bounds follow the symmetric
// uniform quantiser of the tokenizer; the shift-based step is this design's
// choice (all scales are powers of two; other scale factors are folded into the
// following layer's weights).
module haq_requant #(
  parameter int IW = 32,
  parameter int OW = 8
) (
  input  logic signed [IW-1:0] din,
  input  logic [5:0]           shift,
  input  logic [4:0]           bits,
  output logic signed [OW-1:0] dout
);
  logic signed [IW:0] rounded, shifted, hi, lo;
  always_comb begin
    rounded = (shift == 0) ? (IW+1)'(din) : (IW+1)'(din) + ((IW+1)'(1) <<< (shift - 1));
    shifted = rounded >>> shift;
    hi = ((IW+1)'(1) <<< (bits - 1)) - 1;
    lo = -((IW+1)'(1) <<< (bits - 1));
    if (shifted > hi)      dout = OW'(hi);
    else if (shifted < lo) dout = OW'(lo);
    else                   dout = OW'(shifted);
  end
endmodule

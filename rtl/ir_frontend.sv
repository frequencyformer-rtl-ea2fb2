// ir_frontend: behavioural model (not synthesisable) of the integrating
// receiver front-end: a clocked dynamic integrator followed by a dynamic
// comparator, one per data lane.
//
// The lane voltage vin (volts, relative to vref) is sampled OSR times per
// bit on clk_os. During the first half of each bit the integrator accumulates
// gain * (vin - vref); at the half-bit point the comparator, which adds its own
// Gaussian input-referred noise of sigma cmp_noise, decides the bit; the
// second half is the precharge phase that resets the integrator. dout and
// dout_valid change at the decision point. Averaging OSR/2 samples lowers the
// noise seen by the comparator by sqrt(OSR/2) compared with a comparator
// that samples the lane once, which is what allows a lower transmit swing.
// Integration over half the bit period with precharge in the other half and
// a comparator after the integrator follow the receiver description; the
// sampled-time model, the gain and the noise model are this model's choices.
// A DDR receiver would use two such paths on opposite clock phases.
// acc and ph are updated with blocking assignments inside the clocked block
// on purpose: they are the model's real-valued internal state, read only
// within the same block, so the lint note about blocking assignments in a
// sequential block does not point at a race here.
module ir_frontend #(
  parameter int  OSR  = 8,
  parameter real GAIN = 1.0
) (
  input  logic clk_os,
  input  logic rst_n,
  input  real  vin,
  input  real  vref,
  input  real  cmp_noise,
  output logic dout,
  output logic dout_valid
);
  real acc;
  int  ph;
  function automatic real gauss();
    real s;
    s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom % 65536) / 65536.0;
    return s - 6.0;
  endfunction
  always @(posedge clk_os or negedge rst_n) begin
    if (!rst_n) begin
      acc = 0.0; ph = 0; dout <= 1'b0; dout_valid <= 1'b0;
    end else begin
      dout_valid <= 1'b0;
      if (ph < OSR / 2) acc = acc + GAIN * (vin - vref);
      if (ph == OSR / 2 - 1) begin
        dout <= (acc + cmp_noise * gauss()) > 0.0;
        dout_valid <= 1'b1;
      end
      if (ph == OSR - 1) begin acc = 0.0; ph = 0; end
      else ph = ph + 1;
    end
  end
endmodule

// ldo_comparator: behavioural model of the clocked one-bit comparator (the
// regulator's one-bit ADC). This is an analog circuit, so it is modelled with
// real-valued inputs and is not synthesizable.
//
// The paper's circuit is a clocked sense amplifier followed by an SR latch.
// While the clock is low, both sense nodes are precharged. At the rising edge,
// the node that discharges faster wins. The SR latch then holds the decision
// until the next rising edge. Seen from outside, it samples at the rising edge
// and holds the result for a whole cycle, and this model does exactly that:
//   dout = 1 when vout < vref (the output is low, so turn on more devices)
//   dout = 0 otherwise (vout = vref gives 0, this model's choice)
// The precharge phase is not visible at the latch output and is not modelled.
// Neither are offset, noise or metastability. dout is 0 at power-up.
//
// Timing: dout changes only at rising edges of clk. It is the error sample
// e(nT) = sign(VREF(nT) - VOUT(nT)), as a bit.
module ldo_comparator (
  input  logic clk,
  input  real  vref,   // reference voltage, V
  input  real  vout,   // regulated output voltage, V
  output logic dout    // 1 = vout below vref
);

  initial dout = 1'b0;

  always @(posedge clk) begin
    dout <= (vout < vref);
  end

endmodule

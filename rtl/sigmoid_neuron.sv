// sigmoid_neuron: behavioural model of the readout (output) point neuron.
// This is a model of an analog circuit, not synthesizable hardware.
//
// The readout neuron sums the weighted reservoir outputs and applies a
// sigmoid, giving a prediction in [0, 1]. The circuit uses two op-amps; how
// they shape the sigmoid is not given, so this model uses the piecewise
// linear "hard sigmoid" y = clamp(0.5 + s/4, 0, 1), which has the sigmoid's
// value and slope at s = 0 and its range.
//
// Interface: purely combinational; `clipped` flags saturation at 0 or 1.
module sigmoid_neuron
  import esn_pkg::*;
(
  input  vsig_t vsum,
  output vsig_t yhat,
  output logic  clipped
);

  longint v;

  always_comb begin
    v       = longint'(ONE) / 2 + (longint'(vsum) >>> 2);
    clipped = 1'b0;
    if (v > longint'(ONE)) begin
      v = longint'(ONE); clipped = 1'b1;
    end else if (v < 0) begin
      v = 0;             clipped = 1'b1;
    end
    yhat = vsig_t'(v);
  end

endmodule

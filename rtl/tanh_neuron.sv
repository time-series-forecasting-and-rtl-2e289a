// tanh_neuron: behavioural model of a reservoir neuron amplifier. This is a
// model of an analog circuit, not synthesizable hardware.
//
// Each reservoir row of the crossbar ends in an inverting op-amp with
// feedback resistor Rf. Its output is the weighted sum of the row (the
// crossbar model already applies Rf and the inversion, see mem_crossbar).
// The design approximates tanh by the op-amp's own linear region and
// limited output swing; this model therefore passes the sum through
// unchanged inside +/-VSAT and clips it at +/-VSAT outside. VSAT = 1.0 V
// matches the [-1, 1] range of tanh; the exact knee of the real op-amp is
// not given.
//
// Interface: purely combinational; `clipped` flags that the output is in
// saturation (used to count how often the non-linearity acts).
module tanh_neuron
  import esn_pkg::*;
#(
  parameter int VSAT = ONE
) (
  input  vsig_t vsum,
  output vsig_t xhat,
  output logic  clipped
);

  always_comb begin
    clipped = 1'b0;
    xhat    = vsum;
    if (vsum > vsig_t'(VSAT)) begin
      xhat = vsig_t'(VSAT);  clipped = 1'b1;
    end else if (vsum < -vsig_t'(VSAT)) begin
      xhat = -vsig_t'(VSAT); clipped = 1'b1;
    end
  end

endmodule

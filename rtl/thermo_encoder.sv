// thermo_encoder: thermometer-to-binary encoder, the digital back end of the
// 6-bit flash ADC.
//
// A flash ADC compares its input with 2**BITS - 1 reference levels at once;
// comparator k (0-based) is high when the input is at or above level k+1,
// so a clean result is a thermometer code: ones from bit 0 up to some bit,
// zeros above it. The encoder finds the top of the ones with a one-hot
// "edge" detector, hot[k] = therm[k] & ~therm[k+1], and ORs together the
// binary numbers k+1 of the edges found; all zeros gives code 0. This is the
// classic ROM-style flash encoder; the design only names the ADC and its
// resolution, so the encoder structure is this design's choice.
//
// Interface: purely combinational, code is valid in the same cycle.
module thermo_encoder #(
  parameter int BITS = 6
) (
  input  logic [(1<<BITS)-2:0] therm,
  output logic [BITS-1:0]      code
);

  localparam int N = (1 << BITS) - 1;

  logic [N-1:0] hot;

  always_comb begin
    for (int k = 0; k < N; k++)
      hot[k] = therm[k] & ((k == N-1) ? 1'b1 : ~therm[(k == N-1) ? k : k+1]);
    code = '0;
    for (int k = 0; k < N; k++)
      if (hot[k]) code = code | BITS'(k + 1);
  end

endmodule

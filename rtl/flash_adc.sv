// flash_adc: behavioural model of the 6-bit flash ADC of the training
// circuitry. The comparator ladder is an analog circuit and is modelled
// here; the thermometer encoder behind it is synthesizable (thermo_encoder).
//
// The ADC digitises both the gradient (error times reservoir output) and the
// voltage of the memristor conductance test. Its input range is
// [-1 V, +1 V); the 63 comparator levels sit half an LSB below each code
// boundary, level k = (k - 32 - 0.5)/32 V for k = 1..63, so that 0 V gives
// code 32 and the quantiser is symmetric about zero (mid-tread). The result
// is offset binary: code 32 means 0 V, one LSB is 1/32 V. The range and the
// code format are this design's choice; the design gives only "6-bit flash".
//
// Timing: the comparator outputs are latched on each clock edge, so `code`
// reflects `vin` of the previous cycle (one cycle of latency).
module flash_adc
  import esn_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  vsig_t     vin,
  output adc_code_t code
);

  localparam int NLEV = (1 << ADC_BITS) - 1;
  localparam int LSB  = ONE / ADC_MID;          // 1/32 V = 128

  logic [NLEV-1:0] cmp, cmp_q;

  always_comb begin
    for (int k = 1; k <= NLEV; k++)
      cmp[k-1] = (int'(vin) * 2) >= ((2 * (k - ADC_MID) - 1) * LSB);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cmp_q <= {{(NLEV-ADC_MID){1'b0}}, {ADC_MID{1'b1}}};
    else        cmp_q <= cmp;
  end

  thermo_encoder #(.BITS(ADC_BITS)) u_enc (.therm(cmp_q), .code(code));

endmodule

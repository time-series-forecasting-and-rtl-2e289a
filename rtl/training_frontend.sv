// training_frontend: behavioural model of the analog part of the readout
// training circuitry. This is a model of analog circuits, not synthesizable
// hardware.
//
// Two measurements are routed to the ADC, chosen by `meas`:
//  * gradient (meas = 0): a subtractor forms the output error
//    Er = yhat[sel_o] - y[sel_o], and a multiplier forms the gradient of the
//    readout weight (sel_j -> sel_o), Er * x[sel_j];
//  * conductance test (meas = 1): a fixed test voltage is applied to the
//    memristor being tuned and the amplifier output Vo = Rf_t*Vtest*G_u is
//    passed on, from which the controller recovers the conductance
//    (the design's M_u = Rf*Vtest/Vo). The test gain Rf_t*Vtest is chosen here
//    so that the largest conductance (Gon, 200 kOhm) reads 31/32 V, the top
//    of the ADC range; the design fixes Vtest at 50 mV but not the gain.
// The device's conductance comes from its programming state dev_state,
// G = Goff + state/STEPS*(Gon - Goff).
//
// Interface: purely combinational.
module training_frontend
  import esn_pkg::*;
#(
  parameter int NR = 105,
  parameter int NO = 1,
  localparam int JW = (NR > 1) ? $clog2(NR) : 1,
  localparam int OW = (NO > 1) ? $clog2(NO) : 1
) (
  input  logic          meas,
  input  logic [OW-1:0] sel_o,
  input  logic [JW-1:0] sel_j,
  input  vsig_t         yhat   [NO],
  input  vsig_t         y      [NO],
  input  vsig_t         x      [NR],
  input  mstate_t       dev_state,
  output vsig_t         vout
);

  localparam longint FS = longint'(ONE) * 31 / 32;   // Gon reads 31/32 V

  longint er, g;

  always_comb begin
    er = longint'(yhat[sel_o]) - longint'(y[sel_o]);
    g  = 0;
    if (!meas) begin
      vout = sat_v((er * longint'(x[sel_j])) >>> FRAC);
    end else begin
      // Vo/FS = G/Gon = R_ON/R_OFF + (1 - R_ON/R_OFF) * state/STEPS
      g    = longint'(R_ON_OHM) * MEM_STEPS
           + (longint'(R_OFF_OHM) - longint'(R_ON_OHM)) * longint'(dev_state);
      vout = sat_v((FS * g) / (longint'(R_OFF_OHM) * MEM_STEPS));
    end
  end

endmodule

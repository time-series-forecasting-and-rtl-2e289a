// esn_pkg: number formats and constants shared by the memristive echo state
// network (ESN) accelerator.
//
// Every "analog" quantity (a voltage on a crossbar row, a neuron output, the
// output error) is carried as a signed fixed-point word, vsig_t, with
// FRAC fractional bits, so that 1.0 V of signal swing is 2**FRAC. The value
// range of the network, [-1, 1] for reservoir states and [0, 1] for the
// readout, comes from Algorithm 1 of the design; the word width is this
// design's choice.
//
// A memristor is held as a programming state 0..MEM_STEPS: state 0 is the
// high-resistance end (2 MOhm), state MEM_STEPS the low-resistance end
// (200 kOhm), and one unit-length programming pulse moves the state by one.
// MEM_STEPS = 41 is the "full switching pulses" figure of the reservoir and
// readout devices. The conductance is linear in the state (w/D of the device
// model). The feedback resistor Rf of the neuron amplifiers is taken as
// 1/(Gon - Goff), so a differential pair (M-, M+) realises the weight
// (s_minus - s_plus) / MEM_STEPS in [-1, 1]; the Goff parts cancel.
package esn_pkg;

  localparam int VW   = 16;                 // width of an analog sample word
  localparam int FRAC = 12;                 // fractional bits: 1.0 = 4096
  localparam int ONE  = 1 << FRAC;

  typedef logic signed [VW-1:0] vsig_t;

  localparam int MEM_STEPS = 41;            // full-switching pulses, readout/reservoir
  localparam int SW        = 6;             // width of a memristor state
  typedef logic [SW-1:0] mstate_t;

  // Device range of the reservoir/readout memristors in ohms.
  localparam int R_ON_OHM  = 200_000;
  localparam int R_OFF_OHM = 2_000_000;

  // Flash ADC
  localparam int ADC_BITS = 6;
  localparam int ADC_MID  = 1 << (ADC_BITS - 1);   // offset-binary zero, 32
  typedef logic [ADC_BITS-1:0] adc_code_t;

  // Programming operations accepted by a crossbar (see mem_crossbar).
  typedef enum logic [2:0] {
    PROG_WRITE_STATE = 3'd0,   // set one device to a given state
    PROG_PRUNE       = 3'd1,   // Ziksa: make the pair's intact device equal the other one
    PROG_STUCK_ON    = 3'd2,   // inject a stuck-on (low resistance) fault
    PROG_STUCK_OFF   = 3'd3,   // inject a stuck-off (high resistance) fault
    PROG_CLEAR_FAULT = 3'd4    // make a device tunable again
  } prog_op_e;

  // Which half of a differential pair a write or a pulse addresses.
  typedef enum logic {
    DEV_PLUS  = 1'b0,          // M+ : raises the pair's weight when its conductance falls
    DEV_MINUS = 1'b1           // M- : raises the pair's weight when its conductance rises
  } dev_sel_e;

  // Saturate a wide signed value to vsig_t.
  function automatic vsig_t sat_v(input longint x);
    if (x > longint'(32767))       return vsig_t'(16'sh7FFF);
    else if (x < longint'(-32768)) return vsig_t'(16'sh8000);
    else                           return vsig_t'(x);
  endfunction

endpackage

// sample_hold: behavioural model of an analog sample-and-hold (S/H) circuit.
// This is a model of an analog circuit, not synthesizable hardware.
//
// The design puts an S/H at the input of the network to discretise the
// continuous time-series input and keep it steady until the reservoir is
// ready. Here the held "voltage" is a fixed-point word (esn_pkg::vsig_t).
// On a clock edge with `sample` high the input is captured; otherwise the
// held value leaks toward zero by LEAK_LSB per clock, standing in for the
// charge loss of a real hold capacitor (the design names this leakage as a
// source of error but gives no rate, so the default is no leakage).
//
// Interface: vin is sampled when `sample` is high; vout is valid from the
// cycle after. Reset clears the held value to 0 V.
module sample_hold
  import esn_pkg::*;
#(
  parameter int LEAK_LSB = 0            // droop per clock, in LSBs of vsig_t
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  sample,
  input  vsig_t vin,
  output vsig_t vout
);

  vsig_t held;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              held <= '0;
    else if (sample)         held <= vin;
    else if (LEAK_LSB > 0) begin
      if (held > vsig_t'(LEAK_LSB))        held <= held - vsig_t'(LEAK_LSB);
      else if (held < -vsig_t'(LEAK_LSB))  held <= held + vsig_t'(LEAK_LSB);
      else                                 held <= '0;
    end
  end

  assign vout = held;

endmodule

// feedback_sh: behavioural model of the reservoir feedback circuit of one
// neuron. This is a model of an analog circuit, not synthesizable hardware.
//
// A reservoir output x(t) is a tanh value and may be negative, which an S/H
// cannot store. The feedback circuit therefore adds a fixed DC offset
// (VOFF) before sampling, so that the stored level is always positive, and
// removes the offset again when the stored value is played back to the
// reservoir as x(t-1) and to the readout. The stored (offset) level leaks
// toward 0 V by LEAK_LSB per clock while held; the design mentions the
// leakage but not its rate, so it defaults to none.
//
// Interface: on a clock with `sample` high, x_in + VOFF is stored; x_out is
// the stored level minus VOFF. `stored` exposes the offset level so a test
// can check it never goes negative. Reset stores VOFF, i.e. x_out = 0.
module feedback_sh
  import esn_pkg::*;
#(
  parameter int VOFF     = ONE,         // DC offset: 1.0 V lifts [-1,1] to [0,2]
  parameter int LEAK_LSB = 0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  sample,
  input  vsig_t x_in,
  output vsig_t x_out,
  output vsig_t stored
);

  vsig_t held;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      held <= vsig_t'(VOFF);
    else if (sample) held <= sat_v(longint'(x_in) + longint'(VOFF));
    else if (LEAK_LSB > 0) begin
      if (held > vsig_t'(LEAK_LSB)) held <= held - vsig_t'(LEAK_LSB);
      else                          held <= '0;
    end
  end

  assign stored = held;
  assign x_out  = sat_v(longint'(held) - longint'(VOFF));

endmodule

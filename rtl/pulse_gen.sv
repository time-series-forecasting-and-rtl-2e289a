// pulse_gen: converts an update amount Phi into a programming pulse of fixed
// amplitude and a duration proportional to Phi.
//
// The design does this with an integrator (R, C, reference Vr, and a reset
// switch across C) followed by a comparator: the comparator output Vm is
// high while Phi > V_int, and V_int ramps at a rate set by Vr, R and C, so
// the pulse lasts T_h, proportional to Phi. This module is the clocked digital
// form of the same circuit: on `start` the integrator is reset and Phi is
// latched, then each clock V_int grows by `ramp_step`. Vm is high while
// Phi > V_int, so the pulse lasts ceil(Phi / ramp_step) clocks (0 for Phi = 0).
// The clocked ramp is this design's choice; the analog ramp it replaces
// has the same behaviour.
//
// Interface: start is a one-clock strobe, accepted when not busy; vm is the
// pulse; done strobes for one clock on the clock after the pulse ends.
// Phi is a magnitude (the polarity of the pulse is chosen elsewhere).
module pulse_gen #(
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] phi,
  input  logic [W-1:0] ramp_step,
  output logic         vm,
  output logic         busy,
  output logic         done
);

  logic [W:0]   v_int;     // one bit of headroom so the ramp cannot wrap
  logic [W-1:0] phi_q;

  assign vm = busy && ({1'b0, phi_q} > v_int);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      v_int <= '0;
      phi_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        v_int <= '0;
        phi_q <= phi;
      end else if (busy) begin
        if (vm) begin
          v_int <= v_int + {1'b0, ramp_step};
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // A zero ramp would never end a pulse.
  a_ramp_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
                                   (start && !busy) |-> (ramp_step != '0));

endmodule

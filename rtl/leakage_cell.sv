// leakage_cell: behavioural model of the memristive leakage cell of one
// reservoir neuron. This is a model of an analog circuit, not synthesizable
// hardware.
//
// The leaky integration x(t) = delta*xhat(t) + (1-delta)*x(t-1) is done
// without an extra op-amp: xhat drives memristor Mx, x(t-1) drives My, and
// Mz ties the common node to ground. The node voltage is
//   x = delta*xhat + (1-delta')*x(t-1),
//   delta    = (Mz||My) / ((Mz||My) + Mx),
//   1-delta' = (Mz||Mx) / ((Mz||Mx) + My),
// which is the design's own formula; the two coefficients add up to one only
// when Mz is much larger than Mx and My. The model computes both
// coefficients from the three resistances (in ohms, device range
// 100 kOhm - 10 MOhm) exactly as written, in FRAC-bit fixed point.
//
// Interface: combinational. r_x/r_y/r_z are the programmed resistances of
// Mx, My, Mz; delta_q/one_minus_delta_q expose the two coefficients.
module leakage_cell
  import esn_pkg::*;
(
  input  vsig_t       xhat,
  input  vsig_t       x_prev,
  input  logic [31:0] r_x,
  input  logic [31:0] r_y,
  input  logic [31:0] r_z,
  output vsig_t       x_out,
  output vsig_t       delta_q,
  output vsig_t       one_minus_delta_q
);

  longint rx, ry, rz, rzy, rzx, d, omd;

  always_comb begin
    rx  = longint'(r_x);
    ry  = longint'(r_y);
    rz  = longint'(r_z);
    rzy = (rz + ry) > 0 ? (rz * ry) / (rz + ry) : 0;
    rzx = (rz + rx) > 0 ? (rz * rx) / (rz + rx) : 0;
    d   = (rzy + rx) > 0 ? (rzy * ONE) / (rzy + rx) : 0;
    omd = (rzx + ry) > 0 ? (rzx * ONE) / (rzx + ry) : 0;
    delta_q           = vsig_t'(d);
    one_minus_delta_q = vsig_t'(omd);
    x_out = sat_v((d * longint'(xhat) + omd * longint'(x_prev)) >>> FRAC);
  end

endmodule

// esn_accel: top level of the memristive echo state network (ESN)
// accelerator with in-situ trained readout.
//
// Data path, per time step (see global_controller for the sequence):
//   u(t) -> input S/H -> reservoir crossbar (rows: NU inputs, then NR
//   feedback lines x(t-1)) -> NR tanh neurons -> NR leakage cells
//   (x = delta*xhat + (1-delta)*x(t-1)) -> NR feedback S/H circuits (DC
//   offset, sample, hold) -> readout crossbar -> NO sigmoid neurons -> yhat.
// Training path: training front end (error, gradient product, conductance
// test) -> 6-bit flash ADC -> global controller -> pulse converter ->
// readout crossbar, one device at a time.
// The reservoir weights (input and recurrent) are fixed after programming;
// their sparsity is set with Ziksa-style "prune" writes on the res_prog
// port, which equalise M+ and M- of a pair. The readout weights are
// programmed once (ro_prog) and then trained on chip. Both ports also
// inject stuck-on/stuck-off faults.
//
// The analog blocks are behavioural models (see each file); the controller,
// pulse converter and ADC encoder are synthesizable. Default sizes are the
// design's evaluated network, 1 input x 105 reservoir neurons x 1 output.
//
// Interface: program the crossbars and configuration first; then, for each
// sample, put u_in (and y_target when learning) on the ports and strobe
// step_start while `ready`. yhat is valid from yhat_valid until the next
// step; step_done ends the step (after training, when enabled).
module esn_accel
  import esn_pkg::*;
#(
  parameter int NU        = 1,
  parameter int NR        = 105,
  parameter int NO        = 1,
  parameter int ENDURANCE = 1_000_000_000,
  parameter int SH_LEAK   = 0,          // S/H droop per clock, LSBs
  localparam int RR  = NU + NR,         // reservoir crossbar rows
  localparam int RRW = $clog2(RR),
  localparam int RCW = (NR > 1) ? $clog2(NR) : 1,
  localparam int OCW = (NO > 1) ? $clog2(NO) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // time step
  input  vsig_t           u_in     [NU],
  input  vsig_t           y_target [NO],
  input  logic            step_start,
  output logic            ready,
  output logic            yhat_valid,
  output logic            step_done,
  output vsig_t           yhat     [NO],
  output vsig_t           x_state  [NR],
  // configuration
  input  logic            learn_en,
  input  vsig_t           alpha,
  input  vsig_t           lambda,
  input  logic [15:0]     theta,
  input  logic [3:0]      nup_log2,
  input  logic [VW-1:0]   ramp_step,
  input  logic [31:0]     leak_rx,
  input  logic [31:0]     leak_ry,
  input  logic [31:0]     leak_rz,
  // reservoir crossbar programming (Ziksa writes, faults)
  input  logic            res_prog_en,
  input  prog_op_e        res_prog_op,
  input  logic [RRW-1:0]  res_prog_row,
  input  logic [RCW-1:0]  res_prog_col,
  input  dev_sel_e        res_prog_dev,
  input  mstate_t         res_prog_state,
  // readout crossbar programming (initial weights, faults)
  input  logic            ro_prog_en,
  input  prog_op_e        ro_prog_op,
  input  logic [RCW-1:0]  ro_prog_row,
  input  logic [OCW-1:0]  ro_prog_col,
  input  dev_sel_e        ro_prog_dev,
  input  mstate_t         ro_prog_state,
  // status
  output logic            res_clipped,
  output logic            out_clipped,
  output logic            wearout,
  output logic            ev_update,    // a readout memristor was tuned
  output logic            ev_sparse,    // a weight update was skipped (|grad| < theta)
  output mstate_t         res_rd_state, // state of the device on res_prog_row/col/dev
  output vsig_t           leak_delta,   // leakage cell coefficients, Q(FRAC)
  output vsig_t           leak_one_minus_delta
);

  vsig_t u_held  [NU];
  vsig_t res_row [RR];
  vsig_t res_sum [NR];
  vsig_t xhat    [NR];
  vsig_t x_new   [NR];
  vsig_t x_fb    [NR];
  vsig_t fb_lvl  [NR];
  vsig_t ro_sum  [NO];
  logic  [NR-1:0] t_clip;
  logic  [NO-1:0] s_clip;

  logic      in_sample, fb_sample, fe_meas, pg_start, pulse_up, pg_done;
  logic      pg_vm, pg_busy, res_wear, ro_wear;
  logic [OCW-1:0] sel_o;
  logic [RCW-1:0] sel_j;
  dev_sel_e  sel_dev;
  adc_code_t adc_code;
  logic [VW-1:0] pg_phi;
  vsig_t     fe_v;
  mstate_t   ro_rd_state;
  vsig_t     delta_q [NR];
  vsig_t     omd_q   [NR];

  // ---------------- input layer ----------------
  for (genvar i = 0; i < NU; i++) begin : g_in
    sample_hold #(.LEAK_LSB(SH_LEAK)) u_sh (
      .clk, .rst_n, .sample(in_sample), .vin(u_in[i]), .vout(u_held[i]));
    assign res_row[i] = u_held[i];
  end
  for (genvar r = 0; r < NR; r++) begin : g_fbrow
    assign res_row[NU + r] = x_fb[r];
  end

  // ---------------- reservoir layer ----------------
  mem_crossbar #(.ROWS(RR), .COLS(NR), .ENDURANCE(ENDURANCE)) u_res_xbar (
    .clk, .rst_n,
    .v_row(res_row), .v_col(res_sum),
    .prog_en(res_prog_en), .prog_op(res_prog_op), .prog_row(res_prog_row),
    .prog_col(res_prog_col), .prog_dev(res_prog_dev), .prog_state(res_prog_state),
    .pulse_en(1'b0), .pulse_up(1'b0), .pulse_row('0), .pulse_col('0),
    .pulse_dev(DEV_PLUS),
    .rd_row(res_prog_row), .rd_col(res_prog_col), .rd_dev(res_prog_dev),
    .rd_state(res_rd_state), .wearout(res_wear));

  for (genvar n = 0; n < NR; n++) begin : g_neuron
    tanh_neuron u_tanh (.vsum(res_sum[n]), .xhat(xhat[n]), .clipped(t_clip[n]));
    leakage_cell u_leak (
      .xhat(xhat[n]), .x_prev(x_fb[n]),
      .r_x(leak_rx), .r_y(leak_ry), .r_z(leak_rz),
      .x_out(x_new[n]), .delta_q(delta_q[n]), .one_minus_delta_q(omd_q[n]));
    feedback_sh #(.LEAK_LSB(SH_LEAK)) u_fb (
      .clk, .rst_n, .sample(fb_sample), .x_in(x_new[n]),
      .x_out(x_fb[n]), .stored(fb_lvl[n]));
    assign x_state[n] = x_fb[n];
  end

  // ---------------- readout layer ----------------
  mem_crossbar #(.ROWS(NR), .COLS(NO), .ENDURANCE(ENDURANCE)) u_ro_xbar (
    .clk, .rst_n,
    .v_row(x_fb), .v_col(ro_sum),
    .prog_en(ro_prog_en), .prog_op(ro_prog_op), .prog_row(ro_prog_row),
    .prog_col(ro_prog_col), .prog_dev(ro_prog_dev), .prog_state(ro_prog_state),
    .pulse_en(pg_vm), .pulse_up(pulse_up), .pulse_row(sel_j), .pulse_col(sel_o),
    .pulse_dev(sel_dev),
    .rd_row(sel_j), .rd_col(sel_o), .rd_dev(sel_dev),
    .rd_state(ro_rd_state), .wearout(ro_wear));

  for (genvar o = 0; o < NO; o++) begin : g_out
    sigmoid_neuron u_sig (.vsum(ro_sum[o]), .yhat(yhat[o]), .clipped(s_clip[o]));
  end

  // ---------------- training circuitry ----------------
  training_frontend #(.NR(NR), .NO(NO)) u_fe (
    .meas(fe_meas), .sel_o, .sel_j, .yhat, .y(y_target), .x(x_fb),
    .dev_state(ro_rd_state), .vout(fe_v));

  flash_adc u_adc (.clk, .rst_n, .vin(fe_v), .code(adc_code));

  global_controller #(.NR(NR), .NO(NO)) u_ctrl (
    .clk, .rst_n,
    .step_start, .ready, .yhat_valid, .step_done,
    .learn_en, .alpha, .lambda, .theta, .nup_log2, .ramp_step,
    .in_sample, .fb_sample,
    .fe_meas, .sel_o, .sel_j, .sel_dev, .adc_code,
    .pg_start, .pg_phi, .pulse_up, .pg_done,
    .ev_update, .ev_sparse);

  pulse_gen #(.W(VW)) u_pg (
    .clk, .rst_n, .start(pg_start), .phi(pg_phi), .ramp_step,
    .vm(pg_vm), .busy(pg_busy), .done(pg_done));

  assign res_clipped = |t_clip;
  assign out_clipped = |s_clip;
  assign wearout     = res_wear | ro_wear;
  // All leakage cells share the global Mx/My/Mz setting; cell 0 is reported.
  assign leak_delta           = delta_q[0];
  assign leak_one_minus_delta = omd_q[0];

  // The DC offset must keep every stored feedback level non-negative.
  for (genvar n = 0; n < NR; n++) begin : g_chk
    a_fb_positive: assert property (@(posedge clk) disable iff (!rst_n)
                                    fb_lvl[n] >= 0);
  end
  // Only one memristor is tuned at a time: no pulse while the controller
  // is not waiting for one.
  a_one_pulse: assert property (@(posedge clk) disable iff (!rst_n)
                                pg_vm |-> pg_busy);

endmodule

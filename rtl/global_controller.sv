// global_controller: sequencing and in-situ training controller of the
// memristive ESN accelerator.
//
// One time step of the network is one pass through this controller:
//   1. SAMPLE   the input S/H captures u(t);
//   2. SETTLE   the reservoir crossbar, neurons and leakage cells settle to
//               x(t) (SETTLE_CYC clocks);
//   3. HOLD     the feedback S/H circuits capture x(t); they now drive both
//               the readout and, next step, the reservoir as x(t-1);
//   4. READ     the readout settles (READ_CYC clocks); yhat is valid and
//               `yhat_valid` strobes;
//   5. GRAD     (learning only) for every readout weight (j -> o), the
//               training front end forms (yhat_o - y_o) * x_j, the flash ADC
//               digitises it, and the signed code is added to that weight's
//               gradient accumulator: grad += x (x) Er;
//   6. UPDATE   (learning only, when count % n_up == 0) the weights are
//               visited one at a time. A weight whose |grad| is below the
//               threshold theta is skipped (gradient sparsification).
//               Otherwise one device of its pair is chosen, alternating
//               between M+ and M- on successive updates of that weight. A
//               test voltage is applied to it and the ADC reads its
//               conductance G_u. The controller then forms
//                 Phi = s_u * (-alpha * grad / n_up) + lambda * G_u
//               (s_u = +1 for M-, -1 for M+, as the weight is G- - G+) and
//               starts the pulse converter. The pulse moves the device's
//               conductance up if Phi > 0 and down otherwise, for a time
//               proportional to |Phi|. All accumulators are cleared after
//               the pass.
//   7. DONE     `step_done` strobes; count is incremented.
// This follows lines 7-21 of the design's training algorithm (LMS with
// weight decay, sparsified gradients, updates every n_up steps), its text on
// the global controller (gradients stored, conductance measured with a test
// voltage, conductance times the regularisation factor added to the
// gradient, one memristor at a time) and its alternating tuning of the two
// devices of a pair. The phase order, the settle times, the
// number formats, the power-of-two n_up (given as log2) and the
// per-weight M+/M- toggle are this design's choices.
//
// Number formats: ADC codes are offset binary (32 = 0), one LSB = 1/32.
// Gradient accumulators hold sums of signed codes (GW bits, saturating).
// alpha and lambda are signed Q(FRAC); theta is in ADC LSBs (compared with
// |grad| before the division by n_up, as in the algorithm). Phi is in
// weight units, Q(FRAC), where one device state is 1/MEM_STEPS.
//
// Interface: step_start is a one-clock strobe accepted in IDLE (`ready`);
// the host holds y (the target) stable until step_done. Configuration
// inputs must be stable while a step runs.
module global_controller
  import esn_pkg::*;
#(
  parameter int NR         = 105,
  parameter int NO         = 1,
  parameter int GW         = 16,     // gradient accumulator width
  parameter int SETTLE_CYC = 2,
  parameter int READ_CYC   = 2,
  localparam int JW = (NR > 1) ? $clog2(NR) : 1,
  localparam int OW = (NO > 1) ? $clog2(NO) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // step handshake
  input  logic            step_start,
  output logic            ready,
  output logic            yhat_valid,
  output logic            step_done,
  // configuration
  input  logic            learn_en,
  input  vsig_t           alpha,
  input  vsig_t           lambda,
  input  logic [GW-1:0]   theta,
  input  logic [3:0]      nup_log2,
  input  logic [VW-1:0]   ramp_step,
  // S/H strobes
  output logic            in_sample,
  output logic            fb_sample,
  // training front end and ADC
  output logic            fe_meas,
  output logic [OW-1:0]   sel_o,
  output logic [JW-1:0]   sel_j,
  output dev_sel_e        sel_dev,
  input  adc_code_t       adc_code,
  // pulse converter
  output logic            pg_start,
  output logic [VW-1:0]   pg_phi,
  output logic            pulse_up,
  input  logic            pg_done,
  // event strobes (for monitoring)
  output logic            ev_update,
  output logic            ev_sparse
);

  typedef enum logic [3:0] {
    S_IDLE, S_SETTLE, S_HOLD, S_READ, S_GRAD_SEL, S_GRAD_CAP, S_COUNT,
    S_UPD_CHK, S_MEAS_SEL, S_MEAS_CAP, S_PULSE, S_PULSE_WAIT, S_NEXT, S_DONE
  } state_e;

  // Conductance of one ADC LSB of the conductance test, in weight units
  // Q(FRAC): G/Gon = (code-32)/31 and Rf*Gon = R_OFF/(R_OFF-R_ON).
  localparam longint GW_PER_CODE =
      (longint'(ONE) * R_OFF_OHM) / (31 * (longint'(R_OFF_OHM) - longint'(R_ON_OHM)));
  localparam int GRAD_LSB = ONE / ADC_MID;   // one ADC LSB of gradient, Q(FRAC)
  localparam logic signed [GW-1:0] GMAX = {1'b0, {(GW-1){1'b1}}};
  localparam logic signed [GW-1:0] GMIN = {1'b1, {(GW-1){1'b0}}};

  state_e state;
  int     wait_cnt;
  int     count;                           // the algorithm's step counter

  logic signed [GW-1:0] grad   [NO][NR];
  logic                 toggle [NO][NR];   // 1: next update tunes M-

  logic signed [GW-1:0] g_cur;
  logic [GW-1:0]        g_abs;
  longint               code_s, phi_w, grad_term, reg_term;

  assign ready  = (state == S_IDLE);
  assign g_cur  = grad[sel_o][sel_j];
  assign g_abs  = g_cur[GW-1] ? GW'(-g_cur) : GW'(g_cur);
  assign code_s = longint'(adc_code) - longint'(ADC_MID);

  // Phi for the device selected by sel_dev, from the conductance code.
  always_comb begin
    grad_term = -((longint'(alpha) * longint'(g_cur) * GRAD_LSB) >>> FRAC);
    grad_term = grad_term >>> nup_log2;
    if (sel_dev == DEV_PLUS) grad_term = -grad_term;
    reg_term  = (longint'(lambda) * code_s * GW_PER_CODE) >>> FRAC;
    phi_w     = grad_term + reg_term;
  end

  function automatic logic signed [GW-1:0] sat_add(input logic signed [GW-1:0] a,
                                                   input longint b);
    longint s;
    s = longint'(a) + b;
    if (s > longint'(GMAX))      return GMAX;
    else if (s < longint'(GMIN)) return GMIN;
    else                         return GW'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      wait_cnt   <= 0;
      count      <= 1;
      in_sample  <= 1'b0;
      fb_sample  <= 1'b0;
      yhat_valid <= 1'b0;
      step_done  <= 1'b0;
      fe_meas    <= 1'b0;
      sel_o      <= '0;
      sel_j      <= '0;
      sel_dev    <= DEV_PLUS;
      pg_start   <= 1'b0;
      pg_phi     <= '0;
      pulse_up   <= 1'b0;
      ev_update  <= 1'b0;
      ev_sparse  <= 1'b0;
      for (int o = 0; o < NO; o++)
        for (int j = 0; j < NR; j++) begin
          grad[o][j]   <= '0;
          toggle[o][j] <= 1'b0;
        end
    end else begin
      in_sample  <= 1'b0;
      fb_sample  <= 1'b0;
      yhat_valid <= 1'b0;
      step_done  <= 1'b0;
      pg_start   <= 1'b0;
      ev_update  <= 1'b0;
      ev_sparse  <= 1'b0;
      unique case (state)
        S_IDLE: if (step_start) begin
          in_sample <= 1'b1;
          wait_cnt  <= SETTLE_CYC;
          state     <= S_SETTLE;
        end
        S_SETTLE: begin
          // the S/H output changes one clock after in_sample
          if (wait_cnt == 0) begin
            fb_sample <= 1'b1;
            state     <= S_HOLD;
          end else wait_cnt <= wait_cnt - 1;
        end
        S_HOLD: begin
          wait_cnt <= READ_CYC;
          state    <= S_READ;
        end
        S_READ: begin
          if (wait_cnt == 0) begin
            yhat_valid <= 1'b1;
            sel_o      <= '0;
            sel_j      <= '0;
            fe_meas    <= 1'b0;
            state      <= learn_en ? S_GRAD_SEL : S_COUNT;
          end else wait_cnt <= wait_cnt - 1;
        end
        // ---- gradient accumulation: grad += x (x) Er -------------------
        S_GRAD_SEL: state <= S_GRAD_CAP;        // ADC latches this cycle
        S_GRAD_CAP: begin
          grad[sel_o][sel_j] <= sat_add(grad[sel_o][sel_j], code_s);
          if (int'(sel_j) == NR - 1) begin
            sel_j <= '0;
            if (int'(sel_o) == NO - 1) begin
              sel_o <= '0;
              state <= S_COUNT;
            end else begin
              sel_o <= sel_o + 1'b1;
              state <= S_GRAD_SEL;
            end
          end else begin
            sel_j <= sel_j + 1'b1;
            state <= S_GRAD_SEL;
          end
        end
        S_COUNT: begin
          // "if count % n_up == 0" of the algorithm; n_up = 2**nup_log2
          count    <= count + 1;
          sel_o    <= '0;
          sel_j    <= '0;
          state    <= (learn_en && ((count & ((1 << nup_log2) - 1)) == 0))
                      ? S_UPD_CHK : S_DONE;
        end
        // ---- sequential weight update, one memristor at a time ---------
        S_UPD_CHK: begin
          if (g_abs < theta) begin
            ev_sparse <= 1'b1;
            state     <= S_NEXT;
          end else begin
            sel_dev <= toggle[sel_o][sel_j] ? DEV_MINUS : DEV_PLUS;
            fe_meas <= 1'b1;
            state   <= S_MEAS_SEL;
          end
        end
        S_MEAS_SEL: state <= S_MEAS_CAP;        // ADC latches this cycle
        S_MEAS_CAP: begin
          fe_meas  <= 1'b0;
          pulse_up <= (phi_w > 0);
          pg_phi   <= (phi_w >= 0) ? VW'(phi_w) : VW'(-phi_w);
          pg_start <= 1'b1;
          state    <= S_PULSE;
        end
        S_PULSE: state <= S_PULSE_WAIT;
        S_PULSE_WAIT: if (pg_done) begin
          ev_update              <= 1'b1;
          toggle[sel_o][sel_j]   <= ~toggle[sel_o][sel_j];
          state                  <= S_NEXT;
        end
        S_NEXT: begin
          grad[sel_o][sel_j] <= '0;
          if (int'(sel_j) == NR - 1) begin
            sel_j <= '0;
            if (int'(sel_o) == NO - 1) begin
              sel_o <= '0;
              state <= S_DONE;
            end else begin
              sel_o <= sel_o + 1'b1;
              state <= S_UPD_CHK;
            end
          end else begin
            sel_j <= sel_j + 1'b1;
            state <= S_UPD_CHK;
          end
        end
        S_DONE: begin
          step_done <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Pulse magnitude must fit the converter's word.
  a_phi_range: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_MEAS_CAP) |-> (phi_w < 32768 && phi_w > -32768));

  // ramp_step is passed to the converter by the top; the controller only
  // checks it is usable before starting a pulse.
  a_ramp: assert property (@(posedge clk) disable iff (!rst_n)
      pg_start |-> (ramp_step != '0));

endmodule

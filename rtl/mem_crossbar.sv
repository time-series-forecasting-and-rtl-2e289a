// mem_crossbar: behavioural model of a 2M (two memristors per weight)
// memristor crossbar with its programming paths. This is a model of analog
// devices, not synthesizable hardware.
//
// Each weight w(r,c) is a pair of devices, M+ and M-, held as programming
// states sp, sm in 0..STEPS (see esn_pkg). Row r carries the voltage v_row[r]
// (the row driver applies v to M+ and -v to M-, as the input S/H does with
// its differential output); column c ends in an inverting amplifier with
// feedback Rf, so the column output is
//   col[c] = sum_r Rf*(G-(r,c) - G+(r,c)) * v_row[r]
//          = sum_r (sm(r,c) - sp(r,c)) / STEPS * v_row[r],
// which is the weighted sum of the design's neuron equation. The device
// conductance is linear in its state, per the device model's
// G = w/D*Gon + (1-w/D)*Goff.
//
// Programming (one device per clock, prog_en high):
//   PROG_WRITE_STATE  set a device to prog_state (initial random weights);
//   PROG_PRUNE        Ziksa sparsity: make the pair's weight zero by setting
//                     M+ equal to M-; if M+ is stuck, M- is set to M+ instead
//                     (how faulty pairs are forced to zero);
//   PROG_STUCK_ON/OFF fault injection: the device is frozen at state STEPS /
//                     state 0;
//   PROG_CLEAR_FAULT  makes the device tunable again.
// Training pulses (pulse_en high for T_h clocks): the addressed device moves
// one state per clock, up (more conductance) if pulse_up, down otherwise,
// saturating at 0 and STEPS. Each pulse counts one switching cycle against
// ENDURANCE; a device that reaches it becomes stuck at its present state
// (the design's stuck-at wear-out assumption) and `wearout` pulses.
// Stuck devices ignore pulses and writes.
//
// A read port returns the state of one device combinationally; the
// conductance test of the training circuitry uses it.
// Reset puts every device at mid-range (weight 0), fault-free and unworn.
module mem_crossbar
  import esn_pkg::*;
#(
  parameter int ROWS      = 106,
  parameter int COLS      = 105,
  parameter int STEPS     = MEM_STEPS,
  parameter int ENDURANCE = 1_000_000_000,
  localparam int RBW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int CBW = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // analog read (inference)
  input  vsig_t           v_row [ROWS],
  output vsig_t           v_col [COLS],
  // programming
  input  logic            prog_en,
  input  prog_op_e        prog_op,
  input  logic [RBW-1:0]  prog_row,
  input  logic [CBW-1:0]  prog_col,
  input  dev_sel_e        prog_dev,
  input  mstate_t         prog_state,
  // training pulses
  input  logic            pulse_en,
  input  logic            pulse_up,
  input  logic [RBW-1:0]  pulse_row,
  input  logic [CBW-1:0]  pulse_col,
  input  dev_sel_e        pulse_dev,
  // device read-back (conductance test)
  input  logic [RBW-1:0]  rd_row,
  input  logic [CBW-1:0]  rd_col,
  input  dev_sel_e        rd_dev,
  output mstate_t         rd_state,
  output logic            wearout
);

  mstate_t sp [ROWS][COLS];
  mstate_t sm [ROWS][COLS];
  logic    kp [ROWS][COLS];      // M+ stuck
  logic    km [ROWS][COLS];      // M- stuck
  int      wp [ROWS][COLS];      // switching cycles seen by M+
  int      wm [ROWS][COLS];
  logic    pulse_q;

  localparam mstate_t MID = mstate_t'(STEPS / 2);
  localparam mstate_t TOP = mstate_t'(STEPS);

  function automatic mstate_t step(input mstate_t s, input logic up);
    if (up) return (s < TOP) ? s + 1'b1 : s;
    else    return (s > 0)   ? s - 1'b1 : s;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          sp[r][c] <= MID; sm[r][c] <= MID;
          kp[r][c] <= 1'b0; km[r][c] <= 1'b0;
          wp[r][c] <= 0;    wm[r][c] <= 0;
        end
      pulse_q <= 1'b0;
      wearout <= 1'b0;
    end else begin
      pulse_q <= pulse_en;
      wearout <= 1'b0;
      if (prog_en) begin
        unique case (prog_op)
          PROG_WRITE_STATE:
            if (prog_dev == DEV_PLUS) begin
              if (!kp[prog_row][prog_col]) sp[prog_row][prog_col] <= prog_state;
            end else begin
              if (!km[prog_row][prog_col]) sm[prog_row][prog_col] <= prog_state;
            end
          PROG_PRUNE:
            if (!kp[prog_row][prog_col])      sp[prog_row][prog_col] <= sm[prog_row][prog_col];
            else if (!km[prog_row][prog_col]) sm[prog_row][prog_col] <= sp[prog_row][prog_col];
          PROG_STUCK_ON:
            if (prog_dev == DEV_PLUS) begin
              kp[prog_row][prog_col] <= 1'b1; sp[prog_row][prog_col] <= TOP;
            end else begin
              km[prog_row][prog_col] <= 1'b1; sm[prog_row][prog_col] <= TOP;
            end
          PROG_STUCK_OFF:
            if (prog_dev == DEV_PLUS) begin
              kp[prog_row][prog_col] <= 1'b1; sp[prog_row][prog_col] <= '0;
            end else begin
              km[prog_row][prog_col] <= 1'b1; sm[prog_row][prog_col] <= '0;
            end
          PROG_CLEAR_FAULT:
            if (prog_dev == DEV_PLUS) kp[prog_row][prog_col] <= 1'b0;
            else                      km[prog_row][prog_col] <= 1'b0;
          default: ;
        endcase
      end else if (pulse_en) begin
        if (pulse_dev == DEV_PLUS) begin
          if (!kp[pulse_row][pulse_col]) begin
            sp[pulse_row][pulse_col] <= step(sp[pulse_row][pulse_col], pulse_up);
            if (!pulse_q) begin
              wp[pulse_row][pulse_col] <= wp[pulse_row][pulse_col] + 1;
              if (wp[pulse_row][pulse_col] + 1 >= ENDURANCE) begin
                kp[pulse_row][pulse_col] <= 1'b1;
                wearout <= 1'b1;
              end
            end
          end
        end else begin
          if (!km[pulse_row][pulse_col]) begin
            sm[pulse_row][pulse_col] <= step(sm[pulse_row][pulse_col], pulse_up);
            if (!pulse_q) begin
              wm[pulse_row][pulse_col] <= wm[pulse_row][pulse_col] + 1;
              if (wm[pulse_row][pulse_col] + 1 >= ENDURANCE) begin
                km[pulse_row][pulse_col] <= 1'b1;
                wearout <= 1'b1;
              end
            end
          end
        end
      end
    end
  end

  // Column sums: Rf*(G- - G+)*v, with Rf*(Gon-Goff) = 1.
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      longint acc;
      acc = 0;
      for (int r = 0; r < ROWS; r++)
        acc += (longint'(sm[r][c]) - longint'(sp[r][c])) * longint'(v_row[r]);
      v_col[c] = sat_v(acc / longint'(STEPS));
    end
  end

  assign rd_state = (rd_dev == DEV_PLUS) ? sp[rd_row][rd_col] : sm[rd_row][rd_col];

endmodule

// tb_esn_accel: end-to-end test of the ESN accelerator, at a reduced size (8 reservoir neurons, endurance of 40 pulses so that wear-out occurs).
//
// 1. Programs the reservoir crossbar with random input weights of magnitude
//    0.5 to 1 and alternating sign
//    and random recurrent weights in [-0.1, 0.1] (all but about one in
//    3 of them pruned to zero with Ziksa writes), and the readout with
//    weights of matching sign (so that the sigmoid starts in saturation);
//    injects one stuck-on readout device.
// 2. Runs 30 steps with learning off and compares yhat and every
//    reservoir state with a floating-point model of the network equations
//    kept in this testbench (tanh as a clip at +/-1, the leakage-cell
//    divider, the hard sigmoid, weights (s- - s+)/41).
// 3. Runs 400 steps of on-chip learning on a one-step-ahead forecast of a
//    sum of two sines, and checks the mean absolute error of the last
//    quarter is below that of the first quarter.
// Every mechanism is counted and must occur: tanh saturation, sigmoid
// saturation, weight updates, sparsified (skipped) updates, tuning of both
// M+ and M-, set and reset pulses, the stuck device never moving, and (where
// ENDURANCE is small enough) device wear-out.
module tb_esn_accel;
  import esn_pkg::*;
  localparam int NU = 1, NR = 8, NO = 1;
  localparam int NREF = 30, NLEARN = 400, KEEP = 3;
  localparam bit EXPECT_WEAR = 1'b1;
  localparam int RRW = $clog2(NU + NR), RCW = $clog2(NR), OCW = 1;

  logic clk = 0, rst_n = 0;
  vsig_t u_in [NU]; vsig_t y_target [NO];
  logic step_start = 0, ready, yhat_valid, step_done;
  vsig_t yhat [NO]; vsig_t x_state [NR];
  logic learn_en; vsig_t alpha, lambda; logic [15:0] theta; logic [3:0] nup_log2;
  logic [15:0] ramp_step; logic [31:0] leak_rx, leak_ry, leak_rz;
  logic res_prog_en = 0; prog_op_e res_prog_op; logic [RRW-1:0] res_prog_row; logic [RCW-1:0] res_prog_col;
  dev_sel_e res_prog_dev; mstate_t res_prog_state;
  logic ro_prog_en = 0; prog_op_e ro_prog_op; logic [RCW-1:0] ro_prog_row; logic [OCW-1:0] ro_prog_col;
  dev_sel_e ro_prog_dev; mstate_t ro_prog_state;
  logic res_clipped, out_clipped, wearout, ev_update, ev_sparse;
  mstate_t res_rd_state; vsig_t leak_delta, leak_one_minus_delta;

  int checks = 0, failures = 0;
  int n_tanh_clip = 0, n_sig_clip = 0, n_upd = 0, n_sparse = 0, n_plus = 0, n_minus = 0;
  int n_set = 0, n_reset = 0, n_wear = 0, n_pruned = 0;
  real w_res [NR][NU+NR];     // reference weights, [neuron][row]
  real w_out [NR];
  real xr [NR];               // reference state
  real d_ref, omd_ref;
  int  stuck_state;

  always #5 clk = ~clk;

  esn_accel #(.NR(NR), .ENDURANCE(40)) dut (.*);

  // mechanism monitors
  always @(posedge clk) if (rst_n) begin
    if (yhat_valid && res_clipped) n_tanh_clip++;
    if (yhat_valid && out_clipped) n_sig_clip++;
    if (ev_update) begin
      n_upd++;
      if (dut.u_ctrl.sel_dev == DEV_PLUS) n_plus++; else n_minus++;
    end
    if (ev_sparse) n_sparse++;
    if (dut.u_pg.vm && !$past(dut.u_pg.vm)) begin if (dut.u_ctrl.pulse_up) n_set++; else n_reset++; end
    if (wearout) n_wear++;
  end

  task automatic res_prog(input prog_op_e op, input int r, input int c, input dev_sel_e d, input int s);
    @(negedge clk); res_prog_en = 1; res_prog_op = op; res_prog_row = RRW'(r); res_prog_col = RCW'(c);
    res_prog_dev = d; res_prog_state = mstate_t'(s);
    @(negedge clk); res_prog_en = 0;
  endtask
  task automatic ro_prog(input prog_op_e op, input int r, input dev_sel_e d, input int s);
    @(negedge clk); ro_prog_en = 1; ro_prog_op = op; ro_prog_row = RCW'(r); ro_prog_col = '0;
    ro_prog_dev = d; ro_prog_state = mstate_t'(s);
    @(negedge clk); ro_prog_en = 0;
  endtask

  function automatic real clip(input real v, input real lo, input real hi);
    return v > hi ? hi : (v < lo ? lo : v);
  endfunction
  function automatic real par(input real a, input real b); return a*b/(a+b); endfunction
  function automatic real series(input int t);
    return 0.5 + 0.25 * $sin(2.0 * 3.14159265 * t / 23.0) + 0.15 * $sin(2.0 * 3.14159265 * t / 7.0);
  endfunction

  // one step of the reference model; returns yhat
  function automatic real ref_step(input real u);
    real xn [NR]; real s, y;
    for (int n = 0; n < NR; n++) begin
      s = w_res[n][0] * u;
      for (int k = 0; k < NR; k++) s += w_res[n][NU + k] * xr[k];
      s = clip(s, -1.0, 1.0);
      xn[n] = d_ref * s + omd_ref * xr[n];
    end
    y = 0.0;
    for (int n = 0; n < NR; n++) begin xr[n] = xn[n]; y += w_out[n] * xr[n]; end
    return clip(0.5 + y / 4.0, 0.0, 1.0);
  endfunction

  task automatic do_step(input real u, input real y, output real yh);
    u_in[0] = vsig_t'(int'(u * ONE)); y_target[0] = vsig_t'(int'(y * ONE));
    wait (ready); @(negedge clk);
    step_start = 1; @(negedge clk); step_start = 0;
    wait (yhat_valid); #1 yh = real'(yhat[0]) / ONE;
    wait (step_done); @(negedge clk);
  endtask

  initial begin
    #(64'd50_000_000); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real yh, yr, e_first, e_last, err;
    int sp, sm, q;
    u_in[0] = '0; y_target[0] = '0;
    learn_en = 0; alpha = vsig_t'(ONE); lambda = -vsig_t'(ONE/256); theta = 16'd3; nup_log2 = 4'd1;
    ramp_step = 16'(ONE / MEM_STEPS); leak_rx = 300_000; leak_ry = 700_000; leak_rz = 1_000_000_000;
    res_prog_op = PROG_WRITE_STATE; res_prog_row = '0; res_prog_col = '0; res_prog_dev = DEV_PLUS; res_prog_state = '0;
    ro_prog_op = PROG_WRITE_STATE; ro_prog_row = '0; ro_prog_col = '0; ro_prog_dev = DEV_PLUS; ro_prog_state = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    d_ref   = par(1.0e9, 700_000.0) / (par(1.0e9, 700_000.0) + 300_000.0);
    omd_ref = par(1.0e9, 300_000.0) / (par(1.0e9, 300_000.0) + 700_000.0);

    // ---- program the reservoir: input weights, then sparse recurrent weights
    for (int n = 0; n < NR; n++) begin
      // strong input weights, |w| >= 0.5, random sign
      sp = $urandom_range(0, 20); sm = sp + 21 + $urandom_range(0, MEM_STEPS - 21 - sp);
      if (n % 2) begin int tmp; tmp = sp; sp = sm; sm = tmp; end
      if (n == 0) begin sp = 0; sm = MEM_STEPS; end
      res_prog(PROG_WRITE_STATE, 0, n, DEV_PLUS, sp);
      res_prog(PROG_WRITE_STATE, 0, n, DEV_MINUS, sm);
      w_res[n][0] = real'(sm - sp) / MEM_STEPS;
      for (int k = 0; k < NR; k++) begin
        sp = 20; sm = 20 + int'($urandom_range(0, 8)) - 4;    // |w| <= 4/41 ~ 0.1
        if (n == 0 && k == 0) sm = 24;                         // self excitation of neuron 0
        res_prog(PROG_WRITE_STATE, NU + k, n, DEV_PLUS, sp);
        res_prog(PROG_WRITE_STATE, NU + k, n, DEV_MINUS, sm);
        w_res[n][NU + k] = real'(sm - sp) / MEM_STEPS;
        if (!(n == 0 && k == 0) && $urandom_range(0, KEEP - 1) != 0) begin
          res_prog(PROG_PRUNE, NU + k, n, DEV_PLUS, 0);
          w_res[n][NU + k] = 0.0;
          n_pruned++;
        end
      end
    end
    // Ziksa prune must leave M+ equal to M-
    res_prog_row = RRW'(NU + 1); res_prog_col = RCW'(2); res_prog_dev = DEV_PLUS; #1 sp = int'(res_rd_state);
    res_prog_dev = DEV_MINUS; #1 sm = int'(res_rd_state);
    checks++; if (w_res[2][NU + 1] == 0.0 && sp != sm) begin failures++; $display("FAIL prune %0d %0d", sp, sm); end
    // ---- readout: weights with the sign of each neuron's input weight, large
    // enough that the sigmoid saturates at first
    for (int k = 0; k < NR; k++) begin
      sp = 20 - 13; sm = 20 + 13;
      if (k % 2) begin int tmp; tmp = sp; sp = sm; sm = tmp; end
      ro_prog(PROG_WRITE_STATE, k, DEV_PLUS, sp);
      ro_prog(PROG_WRITE_STATE, k, DEV_MINUS, sm);
      w_out[k] = real'(sm - sp) / MEM_STEPS;
    end
    ro_prog(PROG_STUCK_ON, 1, DEV_PLUS, 0);
    w_out[1] = real'(int'(dut.u_ro_xbar.sm[1][0]) - MEM_STEPS) / MEM_STEPS;
    stuck_state = MEM_STEPS;
    foreach (xr[n]) xr[n] = 0.0;
    #1;
    checks++;
    if (leak_delta < vsig_t'(int'(d_ref * ONE) - 2) || leak_delta > vsig_t'(int'(d_ref * ONE) + 2)) begin
      failures++; $display("FAIL leakage delta %0d", leak_delta);
    end

    // ---- phase 2: learning off, compare with the reference model
    for (int t = 0; t < NREF; t++) begin
      real u;
      u = (t < 5) ? 1.0 : series(t);
      yr = ref_step(u);
      do_step(u, 0.0, yh);
      checks++;
      if (yh - yr > 0.01 || yr - yh > 0.01) begin failures++; $display("FAIL t=%0d yhat %f ref %f", t, yh, yr); end
      for (int n = 0; n < NR; n++) begin
        real xs; xs = real'(x_state[n]) / ONE;
        checks++;
        if (xs - xr[n] > 0.01 || xr[n] - xs > 0.01) begin
          failures++; if (failures < 10) $display("FAIL t=%0d x[%0d] %f ref %f", t, n, xs, xr[n]);
        end
      end
    end

    // ---- phase 3: on-chip learning, one-step-ahead forecasting
    learn_en = 1;
    e_first = 0.0; e_last = 0.0; q = NLEARN / 4;
    for (int t = 0; t < NLEARN; t++) begin
      do_step(series(NREF + t), series(NREF + t + 1), yh);
      err = yh - series(NREF + t + 1); if (err < 0) err = -err;
      if (t < q) e_first += err;
      if (t >= NLEARN - q) e_last += err;
    end
    e_first /= q; e_last /= q;
    $display("mean |error|: first quarter %f, last quarter %f", e_first, e_last);
    checks++; if (!(e_last < e_first)) begin failures++; $display("FAIL learning did not reduce the error"); end
    checks++; if (int'(dut.u_ro_xbar.sp[1][0]) != stuck_state) begin failures++; $display("FAIL stuck device moved"); end

    // ---- mechanisms
    $display("tanh clips %0d, sigmoid clips %0d, updates %0d (M+ %0d, M- %0d), skipped %0d, set %0d, reset %0d, wear-outs %0d, pruned %0d",
             n_tanh_clip, n_sig_clip, n_upd, n_plus, n_minus, n_sparse, n_set, n_reset, n_wear, n_pruned);
    checks++; if (n_tanh_clip == 0) begin failures++; $display("FAIL no tanh saturation"); end
    checks++; if (n_sig_clip == 0)  begin failures++; $display("FAIL no sigmoid saturation"); end
    checks++; if (n_upd == 0)       begin failures++; $display("FAIL no update"); end
    checks++; if (n_sparse == 0)    begin failures++; $display("FAIL no sparsified update"); end
    checks++; if (n_plus == 0 || n_minus == 0) begin failures++; $display("FAIL alternation"); end
    checks++; if (n_set == 0 || n_reset == 0)  begin failures++; $display("FAIL pulse polarity"); end
    checks++; if (n_pruned == 0)    begin failures++; $display("FAIL no prune"); end
    if (EXPECT_WEAR) begin checks++; if (n_wear == 0) begin failures++; $display("FAIL no wear-out"); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

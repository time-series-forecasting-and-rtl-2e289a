// tb_esn_mackey_glass: the full-size accelerator (all parameters at their
// defaults, 1 x 105 x 1) learning to forecast the Mackey-Glass series
// NP steps ahead on chip.
//
// The series dx/dt = beta*x(t-tau)/(1 + x(t-tau)^n) - gamma*x(t) with
// beta = 0.25, gamma = 0.1, tau = 18, n = 10 is integrated here with Euler
// steps of 0.1 and sampled once per time unit, then scaled to [0, 1].
// The input is driven as 2*u - 1 (full [-1, 1] swing); the target is the
// scaled series NP samples later, in the sigmoid's [0, 1] range.
// Learning runs throughout. After a washout of WASH samples the testbench
// reports the wMAPE = sum|y - yhat| / sum|y| of the first and the last
// quarter of the run, and checks that the last-quarter forecast beats the
// best constant forecast (the series mean), i.e. that the on-chip trained
// readout extracts the dynamics from the reservoir.
module tb_esn_mackey_glass;
  import esn_pkg::*;
  localparam int NU = 1, NR = 105, NO = 1;
  localparam int NS = 1200, NP = 50, WASH = 100, KEEP = 10;
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

  int checks = 0, failures = 0, n_upd = 0;
  real mg [NS + NP + 1];

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && ev_update) n_upd++;

  esn_accel dut (.*);

  task automatic res_prog(input prog_op_e op, input int r, input int c, input dev_sel_e d, input int s);
    @(negedge clk); res_prog_en = 1; res_prog_op = op; res_prog_row = RRW'(r); res_prog_col = RCW'(c);
    res_prog_dev = d; res_prog_state = mstate_t'(s);
    @(negedge clk); res_prog_en = 0;
  endtask
  task automatic ro_prog(input int r, input dev_sel_e d, input int s);
    @(negedge clk); ro_prog_en = 1; ro_prog_op = PROG_WRITE_STATE; ro_prog_row = RCW'(r); ro_prog_col = '0;
    ro_prog_dev = d; ro_prog_state = mstate_t'(s);
    @(negedge clk); ro_prog_en = 0;
  endtask
  task automatic do_step(input real u, input real y, output real yh);
    u_in[0] = vsig_t'(int'((2.0 * u - 1.0) * ONE));   // input swing [-1, 1]
    y_target[0] = vsig_t'(int'(y * ONE));
    wait (ready); @(negedge clk);
    step_start = 1; @(negedge clk); step_start = 0;
    wait (yhat_valid); #1 yh = real'(yhat[0]) / ONE;
    wait (step_done); @(negedge clk);
  endtask

  function automatic void gen_mackey_glass();
    localparam int SUB = 10, HIST = 18 * SUB;
    real h [HIST + 1]; real x, xd, lo, hi;
    int k;
    for (int i = 0; i <= HIST; i++) h[i] = 1.2;
    x = 1.2; k = 0;
    for (int t = 0; t < (NS + NP + 1 + 300) * SUB; t++) begin
      xd = h[t % (HIST + 1)];                      // x(t - tau)
      h[t % (HIST + 1)] = x;
      x = x + 0.1 * (0.25 * xd / (1.0 + xd ** 10) - 0.1 * x);
      if (t >= 300 * SUB && (t % SUB) == 0 && k < NS + NP + 1) begin mg[k] = x; k++; end
    end
    lo = mg[0]; hi = mg[0];
    foreach (mg[i]) begin if (mg[i] < lo) lo = mg[i]; if (mg[i] > hi) hi = mg[i]; end
    foreach (mg[i]) mg[i] = (mg[i] - lo) / (hi - lo);
  endfunction

  initial begin
    #(64'd2_000_000_000); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real yh, err, e_first, s_first, e_last, s_last, m, em;
    int sp, sm, q, nl;
    gen_mackey_glass();
    u_in[0] = '0; y_target[0] = '0;
    learn_en = 1; alpha = vsig_t'(ONE/8); lambda = -vsig_t'(ONE/256); theta = 16'd3; nup_log2 = 4'd1;
    ramp_step = 16'(ONE / MEM_STEPS); leak_rx = 300_000; leak_ry = 700_000; leak_rz = 1_000_000_000;
    res_prog_op = PROG_WRITE_STATE; res_prog_row = '0; res_prog_col = '0; res_prog_dev = DEV_PLUS; res_prog_state = '0;
    ro_prog_op = PROG_WRITE_STATE; ro_prog_row = '0; ro_prog_col = '0; ro_prog_dev = DEV_PLUS; ro_prog_state = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < NR; n++) begin
      sp = $urandom_range(0, MEM_STEPS); sm = $urandom_range(0, MEM_STEPS);
      res_prog(PROG_WRITE_STATE, 0, n, DEV_PLUS, sp);
      res_prog(PROG_WRITE_STATE, 0, n, DEV_MINUS, sm);
      for (int k = 0; k < NR; k++) begin
        if ($urandom_range(0, KEEP - 1) == 0) begin
          res_prog(PROG_WRITE_STATE, NU + k, n, DEV_PLUS, 20);
          res_prog(PROG_WRITE_STATE, NU + k, n, DEV_MINUS, 20 + int'($urandom_range(0, 8)) - 4);
        end else
          res_prog(PROG_PRUNE, NU + k, n, DEV_PLUS, 0);      // reset state is already a zero pair
      end
    end
    for (int k = 0; k < NR; k++) begin
      ro_prog(k, DEV_PLUS, 20); ro_prog(k, DEV_MINUS, 20 + int'($urandom_range(0, 2)) - 1);
    end
    e_first = 0; s_first = 0; e_last = 0; s_last = 0;
    nl = NS - WASH; q = nl / 4;
    for (int t = 0; t < NS; t++) begin
      do_step(mg[t], mg[t + NP], yh);
      if (t >= WASH) begin
        err = yh - mg[t + NP]; if (err < 0) err = -err;
        if (t - WASH < q)       begin e_first += err; s_first += mg[t + NP]; end
        if (t - WASH >= nl - q) begin e_last  += err; s_last  += mg[t + NP]; end
      end
    end
    $display("Mackey-Glass, %0d-step forecast: wMAPE first quarter %f, last quarter %f, %0d device updates",
             NP, e_first / s_first, e_last / s_last, n_upd);
    m = 0; em = 0;
    for (int t = WASH; t < NS; t++) m += mg[t + NP];
    m /= (NS - WASH);
    for (int t = NS - q; t < NS; t++) em += (mg[t + NP] > m) ? mg[t + NP] - m : m - mg[t + NP];
    $display("constant (mean) forecast, last quarter: wMAPE %f", em / s_last);
    checks++; if (!(e_last < em)) begin failures++; $display("FAIL forecast no better than the mean"); end
    checks++; if (n_upd == 0) begin failures++; $display("FAIL no training"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

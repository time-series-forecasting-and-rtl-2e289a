// tb_global_controller: runs the controller alone, with a testbench model of
// the ADC (one clock of latency, codes from tables chosen at random) and of
// the pulse converter. It checks, against its own accumulation of the
// gradient codes:
//  * the step timing (yhat_valid and step_done latencies);
//  * one gradient conversion per readout weight per learning step, none
//    when learning is off;
//  * weight updates only on steps where count % n_up == 0;
//  * gradient sparsification (|grad| < theta skipped, ev_sparse);
//  * the device chosen alternates M+/M- per weight;
//  * Phi magnitude and polarity for each pulse;
//  * one pulse at a time, and the accumulators clear after an update.
module tb_global_controller;
  import esn_pkg::*;
  localparam int NR = 4, NO = 2, SET = 2, RD = 3, NUPL = 1;
  logic clk = 0, rst_n = 0;
  logic step_start = 0, ready, yhat_valid, step_done, learn_en;
  vsig_t alpha, lambda; logic [15:0] theta; logic [3:0] nup_log2; logic [15:0] ramp_step;
  logic in_sample, fb_sample, fe_meas; logic [0:0] sel_o; logic [1:0] sel_j; dev_sel_e sel_dev;
  adc_code_t adc_code; logic pg_start; logic [15:0] pg_phi; logic pulse_up; logic pg_done = 0;
  logic ev_update, ev_sparse;
  int checks = 0, failures = 0;
  int gcode [NO][NR];            // this step's gradient codes (signed)
  int mcode [NO][NR][2];         // conductance-test codes
  int acc   [NO][NR];            // reference accumulators
  int tog   [NO][NR];
  int n_grad_conv, n_meas_conv, n_pulses, n_sparse, n_upd;
  // expected pulse queue
  int exp_phi [$]; logic exp_up [$];
  always #5 clk = ~clk;

  global_controller #(.NR(NR), .NO(NO), .SETTLE_CYC(SET), .READ_CYC(RD)) dut (.*);

  // ADC model: latches the requested quantity, code out one clock later
  always_ff @(posedge clk) begin
    if (fe_meas) adc_code <= adc_code_t'(mcode[sel_o][sel_j][sel_dev == DEV_MINUS] + 32);
    else         adc_code <= adc_code_t'(gcode[sel_o][sel_j] + 32);
  end
  // conversion counters: the controller captures in *_CAP states
  always @(posedge clk) if (rst_n) begin
    if (int'(dut.state) == 5) n_grad_conv++;   // S_GRAD_CAP
    if (int'(dut.state) == 9) n_meas_conv++;   // S_MEAS_CAP
    if (ev_sparse) n_sparse++;
    if (ev_update) n_upd++;
  end
  // pulse converter model and Phi checks
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && pg_start) begin
        int e; logic u;
        n_pulses++;
        checks++;
        if (exp_phi.size() == 0) begin failures++; $display("FAIL unexpected pulse"); end
        else begin
          e = exp_phi.pop_front(); u = exp_up.pop_front();
          if (int'(pg_phi) != e || pulse_up !== u) begin
            failures++; $display("FAIL phi got %0d/%0b exp %0d/%0b o%0d j%0d dev%0d", pg_phi, pulse_up, e, u, sel_o, sel_j, sel_dev);
          end
        end
        repeat ($urandom_range(1, 4)) @(posedge clk);
        checks++; if (pg_start) begin failures++; $display("FAIL second pulse start while busy"); end
        #1 pg_done = 1;
        @(posedge clk); #1 pg_done = 0;
      end
    end
  end

  function automatic void predict_update();
    for (int o = 0; o < NO; o++)
      for (int j = 0; j < NR; j++) begin
        int a; a = acc[o][j] < 0 ? -acc[o][j] : acc[o][j];
        if (a >= int'(theta)) begin
          longint gt, rt, ph; int d; int gpc;
          d = tog[o][j];                              // 0: M+, 1: M-
          gpc = int'((longint'(ONE) * 2_000_000) / (longint'(31) * 1_800_000));   // = 146
          gt = -((longint'(alpha) * acc[o][j] * 128) >>> 12);
          gt = gt >>> NUPL;
          if (d == 0) gt = -gt;
          rt = (longint'(lambda) * mcode[o][j][d] * gpc) >>> 12;
          ph = gt + rt;
          exp_phi.push_back(int'(ph < 0 ? -ph : ph));
          exp_up.push_back(ph > 0);
          tog[o][j] = 1 - d;
        end
        acc[o][j] = 0;
      end
  endfunction

  task automatic run_step(input bit learn, input int count);
    int t0, tv, td, cyc;
    foreach (gcode[o, j]) gcode[o][j] = $urandom_range(0, 30) - 15;
    foreach (mcode[o, j, d]) mcode[o][j][d] = $urandom_range(3, 31);
    learn_en = learn;
    if (learn) foreach (acc[o, j]) acc[o][j] += gcode[o][j];
    if (learn && (count % (1 << NUPL) == 0)) predict_update();
    @(negedge clk);
    checks++; if (!ready) begin failures++; $display("FAIL not ready"); end
    step_start = 1; @(negedge clk); step_start = 0;
    cyc = 1; tv = -1; td = -1;
    while (td < 0 && cyc < 5000) begin
      if (yhat_valid) tv = cyc;
      if (step_done) td = cyc;
      @(negedge clk); cyc++;
    end
    checks++;
    if (tv != SET + RD + 4) begin failures++; $display("FAIL yhat latency %0d", tv); end
    if (!(learn && (count % (1 << NUPL) == 0))) begin
      checks++;
      if (td != tv + (learn ? 2*NR*NO : 0) + 2) begin failures++; $display("FAIL done latency %0d", td); end
    end
  endtask

  initial begin
    #5000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int c0, p0;
    learn_en = 0; alpha = vsig_t'(ONE/2); lambda = -vsig_t'(ONE/64); theta = 16'd6;
    nup_log2 = 4'(NUPL); ramp_step = 16'd100;
    foreach (acc[o, j]) begin acc[o][j] = 0; tog[o][j] = 0; end
    foreach (gcode[o, j]) gcode[o][j] = 0;
    foreach (mcode[o, j, d]) mcode[o][j][d] = 0;
    n_grad_conv = 0; n_meas_conv = 0; n_pulses = 0; n_sparse = 0; n_upd = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // count = 1, 2: learning off, no conversions
    run_step(0, 1); run_step(0, 2);
    checks++; if (n_grad_conv != 0 || n_pulses != 0) begin failures++; $display("FAIL activity with learning off"); end
    for (int c = 3; c < 23; c++) begin
      c0 = n_grad_conv; p0 = n_pulses;
      run_step(1, c);
      checks++; if (n_grad_conv - c0 != NR*NO) begin failures++; $display("FAIL conversions %0d", n_grad_conv - c0); end
      if (c % 2) begin checks++; if (n_pulses != p0) begin failures++; $display("FAIL update on odd count"); end end
    end
    repeat (10) @(negedge clk);
    checks++; if (exp_phi.size() != 0) begin failures++; $display("FAIL %0d pulses missing", exp_phi.size()); end
    checks++; if (n_meas_conv != n_pulses || n_upd != n_pulses) begin failures++; $display("FAIL meas %0d upd %0d pulses %0d", n_meas_conv, n_upd, n_pulses); end
    checks++; if (n_sparse == 0 || n_pulses == 0) begin failures++; $display("FAIL no sparse skip (%0d) or no update (%0d)", n_sparse, n_pulses); end
    checks++; if (n_sparse + n_pulses != 10 * NR * NO) begin failures++; $display("FAIL visits %0d", n_sparse + n_pulses); end
    for (int o = 0; o < NO; o++) for (int j = 0; j < NR; j++) begin checks++; if (dut.grad[o][j] != 0) begin failures++; $display("FAIL grad not cleared"); end end
    $display("updates=%0d sparse=%0d", n_pulses, n_sparse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

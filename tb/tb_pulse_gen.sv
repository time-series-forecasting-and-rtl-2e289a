// tb_pulse_gen: for random Phi and ramp steps, the pulse must last exactly
// ceil(Phi / ramp_step) clocks, be one contiguous pulse, and `done` must
// strobe once on the clock after it ends.
module tb_pulse_gen;
  logic clk = 0, rst_n = 0, start = 0, vm, busy, done;
  logic [15:0] phi, ramp_step;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  pulse_gen #(.W(16)) dut (.*);
  initial begin
    #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    phi = 0; ramp_step = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int len, exp_len, rises, cyc;
      logic prev;
      phi = (t == 0) ? 16'd0 : (t == 1) ? 16'hFFFF : 16'($urandom_range(0, 3000));
      ramp_step = (t == 1) ? 16'hFFFF : 16'($urandom_range(1, 200));
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      len = 0; rises = 0; prev = 0; cyc = 0;
      while (!done && cyc < 5000) begin
        if (vm) len++;
        if (vm && !prev) rises++;
        prev = vm; cyc++;
        @(negedge clk);
      end
      exp_len = (int'(phi) + int'(ramp_step) - 1) / int'(ramp_step);
      checks++;
      if (len != exp_len || (exp_len > 0 && rises != 1) || !done) begin
        failures++; $display("FAIL phi=%0d step=%0d len=%0d exp=%0d rises=%0d", phi, ramp_step, len, exp_len, rises);
      end
      checks++;   // done comes the clock after the last high clock
      if (cyc != exp_len + 1) begin failures++; $display("FAIL done at %0d exp %0d", cyc, exp_len + 1); end
      @(negedge clk);
      checks++; if (done || busy) begin failures++; $display("FAIL done/busy stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

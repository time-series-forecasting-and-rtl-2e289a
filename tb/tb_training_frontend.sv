// tb_training_frontend: checks the gradient product (yhat - y) * x_j and
// the conductance-test voltage (31/32 V * G/Gon) against real references.
module tb_training_frontend;
  import esn_pkg::*;
  localparam int NR = 5, NO = 2;
  logic meas; logic [0:0] sel_o; logic [2:0] sel_j;
  vsig_t yhat [NO]; vsig_t y [NO]; vsig_t x [NR]; mstate_t dev_state; vsig_t vout;
  int checks = 0, failures = 0;
  training_frontend #(.NR(NR), .NO(NO)) dut (.*);
  task automatic near(input real got, input real exp, input string what);
    checks++;
    if (got - exp > 1.5 || exp - got > 1.5) begin failures++; $display("FAIL %s got %f exp %f", what, got, exp); end
  endtask
  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      foreach (yhat[o]) begin yhat[o] = vsig_t'($urandom_range(0, ONE)); y[o] = vsig_t'($urandom_range(0, ONE)); end
      foreach (x[j]) x[j] = vsig_t'($urandom_range(0, 2*ONE)) - vsig_t'(ONE);
      sel_o = 1'($urandom_range(0, NO-1)); sel_j = 3'($urandom_range(0, NR-1));
      dev_state = mstate_t'($urandom_range(0, MEM_STEPS));
      meas = 0; #1;
      near(real'(vout), (real'(yhat[sel_o]) - real'(y[sel_o])) * real'(x[sel_j]) / ONE, "gradient");
      meas = 1; #1;
      near(real'(vout), ONE * 31.0/32.0 * (0.1 + 0.9 * real'(dev_state) / MEM_STEPS), "conductance");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

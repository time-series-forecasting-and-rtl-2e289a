// tb_sigmoid_neuron: checks the readout neuron's hard sigmoid
// y = clamp(0.5 + s/4, 0, 1) against a real-valued reference.
module tb_sigmoid_neuron;
  import esn_pkg::*;
  vsig_t vsum, yhat; logic clipped;
  int checks = 0, failures = 0;
  sigmoid_neuron dut (.*);
  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 400; t++) begin
      int v; real r, e;
      v = (t == 0) ? 0 : int'($urandom_range(0, 65535)) - 32768;
      vsum = vsig_t'(v); #1;
      r = 0.5 + (real'(v) / ONE) / 4.0;
      if (r > 1.0) e = 1.0; else if (r < 0.0) e = 0.0; else e = r;
      checks++;
      if ((real'(yhat) / ONE - e) > 1.0/ONE || (e - real'(yhat) / ONE) > 1.0/ONE ||
          clipped !== (r > 1.0 || r < 0.0)) begin
        failures++; $display("FAIL in %0d got %0d exp %f", v, yhat, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tanh_neuron: checks the reservoir neuron model passes its input in the
// linear region and clips at +/-1.0 V outside it.
module tb_tanh_neuron;
  import esn_pkg::*;
  vsig_t vsum, xhat; logic clipped;
  int checks = 0, failures = 0;
  tanh_neuron dut (.*);
  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 400; t++) begin
      int v, e; logic ec;
      v = (t < 6) ? (t == 0 ? ONE : t == 1 ? -ONE : t == 2 ? ONE+1 : t == 3 ? -ONE-1 : t == 4 ? 32767 : -32768)
                  : (t % 2) ? int'($urandom_range(0, 400)) - 200 + ((t % 4 == 1) ? ONE : -ONE)
                  : int'($urandom_range(0, 65535)) - 32768;
      vsum = vsig_t'(v); #1;
      e = v > ONE ? ONE : (v < -ONE ? -ONE : v);
      ec = (v > ONE) || (v < -ONE);
      checks++;
      if (xhat !== vsig_t'(e) || clipped !== ec) begin
        failures++; $display("FAIL in %0d got %0d/%0b exp %0d/%0b", v, xhat, clipped, e, ec);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

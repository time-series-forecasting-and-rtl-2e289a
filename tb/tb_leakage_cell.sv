// tb_leakage_cell: checks the leakage cell model against the divider
// formulas evaluated in floating point, for random Mx, My in the device
// range and a large Mz, and checks delta + (1 - delta') is close to 1.
module tb_leakage_cell;
  import esn_pkg::*;
  vsig_t xhat, x_prev, x_out, delta_q, one_minus_delta_q;
  logic [31:0] r_x, r_y, r_z;
  int checks = 0, failures = 0;
  leakage_cell dut (.*);
  function automatic real par(input real a, input real b); return a*b/(a+b); endfunction
  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 200; t++) begin
      real rx, ry, rz, d, omd, e;
      rx = $urandom_range(100_000, 2_000_000); ry = $urandom_range(100_000, 2_000_000);
      rz = (t % 2) ? 1.0e9 : $urandom_range(1_000_000, 10_000_000);
      r_x = int'(rx); r_y = int'(ry); r_z = int'(rz);
      xhat   = vsig_t'($urandom_range(0, 2*ONE)) - vsig_t'(ONE);
      x_prev = vsig_t'($urandom_range(0, 2*ONE)) - vsig_t'(ONE);
      #1;
      d   = par(rz, ry) / (par(rz, ry) + rx);
      omd = par(rz, rx) / (par(rz, rx) + ry);
      e   = d * real'(xhat) + omd * real'(x_prev);
      checks++;
      if ((real'(x_out) - e) > 3.0 || (e - real'(x_out)) > 3.0) begin
        failures++; $display("FAIL x_out %0d exp %f", x_out, e);
      end
      checks++;
      if ((real'(delta_q) - d*ONE) > 1.5 || (d*ONE - real'(delta_q)) > 1.5) begin
        failures++; $display("FAIL delta %0d exp %f", delta_q, d*ONE);
      end
      if (t % 2) begin
        checks++;   // Mz >> Mx, My: the two coefficients add up to one
        if (int'(delta_q) + int'(one_minus_delta_q) < ONE - 8 ||
            int'(delta_q) + int'(one_minus_delta_q) > ONE + 8) begin
          failures++; $display("FAIL sum %0d", int'(delta_q) + int'(one_minus_delta_q));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

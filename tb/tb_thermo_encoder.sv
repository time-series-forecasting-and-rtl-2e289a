// tb_thermo_encoder: every clean thermometer code 0..63 must encode to its
// count of ones.
module tb_thermo_encoder;
  logic [62:0] therm; logic [5:0] code;
  int checks = 0, failures = 0;
  thermo_encoder #(.BITS(6)) dut (.*);
  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n <= 63; n++) begin
      therm = (n == 63) ? '1 : ((63'(1) << n) - 63'(1));
      #1; checks++;
      if (code !== 6'(n)) begin failures++; $display("FAIL n=%0d code=%0d", n, code); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_flash_adc: drives the ADC model with voltages across and beyond its
// range and checks the code, round(v*32)+32 clamped to 0..63, one clock
// after the voltage is applied.
module tb_flash_adc;
  import esn_pkg::*;
  logic clk = 0, rst_n = 0;
  vsig_t vin; adc_code_t code;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  flash_adc dut (.*);
  initial begin
    #200000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    vin = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      int v, e;
      v = int'($urandom_range(0, 3*ONE)) - (3*ONE)/2;
      if (t < 64) v = (t - 32) * 128 + ((t % 3) - 1) * 63;   // near each step
      @(negedge clk); vin = vsig_t'(v);
      @(negedge clk);
      e = int'($floor(real'(v) / 128.0 + 0.5)) + 32;
      if (e < 0) e = 0; if (e > 63) e = 63;
      checks++;
      if (int'(code) != e) begin failures++; $display("FAIL v=%0d code=%0d exp=%0d", v, code, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sample_hold: checks that the input sample-and-hold model captures on
// `sample`, holds otherwise, and droops toward zero by LEAK_LSB per clock.
module tb_sample_hold;
  import esn_pkg::*;
  localparam int LEAK = 3;
  logic clk = 0, rst_n = 0, sample = 0;
  vsig_t vin, vout;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  sample_hold #(.LEAK_LSB(LEAK)) dut (.*);
  task automatic chk(input vsig_t got, input vsig_t exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask
  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    vin = '0;
    repeat (2) @(posedge clk);
    #1 chk(vout, 0, "reset");
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      vsig_t v; int n; longint e;
      v = vsig_t'($urandom_range(0, 8191)) - 16'sd4096;
      @(negedge clk); vin = v; sample = 1;
      @(negedge clk); sample = 0; vin = ~v;   // input changes must not leak through
      chk(vout, v, "sampled");
      n = $urandom_range(1, 10);
      repeat (n) @(negedge clk);
      e = longint'(v);
      if (e > 0) e = (e - n*LEAK > 0) ? e - n*LEAK : 0;
      else       e = (e + n*LEAK < 0) ? e + n*LEAK : 0;
      chk(vout, vsig_t'(e), "droop");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

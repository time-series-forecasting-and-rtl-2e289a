// tb_feedback_sh: checks the feedback circuit model: the stored level is the
// sample plus the DC offset (never negative for inputs in [-1, 1]), the
// played-back value has the offset removed, and the stored level droops.
module tb_feedback_sh;
  import esn_pkg::*;
  localparam int LEAK = 2;
  logic clk = 0, rst_n = 0, sample = 0;
  vsig_t x_in, x_out, stored;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  feedback_sh #(.LEAK_LSB(LEAK)) dut (.*);
  task automatic chk(input vsig_t got, input vsig_t exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask
  initial begin
    #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    x_in = '0;
    repeat (2) @(posedge clk);
    #1 chk(x_out, 0, "reset out"); chk(stored, vsig_t'(ONE), "reset level");
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      vsig_t v; int n;
      v = vsig_t'($urandom_range(0, 2*ONE)) - vsig_t'(ONE);
      @(negedge clk); x_in = v; sample = 1;
      @(negedge clk); sample = 0; x_in = '0;
      chk(stored, v + vsig_t'(ONE), "stored = x + offset");
      chk(x_out, v, "offset cancelled");
      checks++; if (stored < 0) failures++;
      n = $urandom_range(1, 5);
      repeat (n) @(negedge clk);
      chk(x_out, v - vsig_t'(n*LEAK), "droop");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

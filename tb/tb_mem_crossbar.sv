// tb_mem_crossbar: checks the 2M crossbar model against a reference copy of
// the device states kept in the testbench: column sums after random state
// writes, Ziksa prune (pair weight becomes zero, also with a stuck M+),
// stuck-on/off faults ignoring later writes, training pulses (one state per
// clock, saturating), the read-back port, and wear-out at ENDURANCE pulses.
module tb_mem_crossbar;
  import esn_pkg::*;
  localparam int ROWS = 4, COLS = 3, END = 6;
  logic clk = 0, rst_n = 0;
  vsig_t v_row [ROWS]; vsig_t v_col [COLS];
  logic prog_en = 0; prog_op_e prog_op; logic [1:0] prog_row; logic [1:0] prog_col;
  dev_sel_e prog_dev; mstate_t prog_state;
  logic pulse_en = 0, pulse_up = 0; logic [1:0] pulse_row, pulse_col; dev_sel_e pulse_dev;
  logic [1:0] rd_row, rd_col; dev_sel_e rd_dev; mstate_t rd_state; logic wearout;
  int checks = 0, failures = 0, wear_seen = 0;
  int sp [ROWS][COLS]; int sm [ROWS][COLS];
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && wearout) wear_seen++;
  mem_crossbar #(.ROWS(ROWS), .COLS(COLS), .ENDURANCE(END)) dut (.*);

  task automatic chk_sums(input string what);
    for (int c = 0; c < COLS; c++) begin
      longint acc = 0;
      for (int r = 0; r < ROWS; r++) acc += longint'(sm[r][c] - sp[r][c]) * longint'(v_row[r]);
      checks++;
      if (longint'(v_col[c]) != acc / MEM_STEPS) begin
        failures++; $display("FAIL %s col %0d got %0d exp %0d", what, c, v_col[c], acc / MEM_STEPS);
      end
    end
  endtask
  task automatic prog(input prog_op_e op, input int r, input int c, input dev_sel_e d, input int s);
    @(negedge clk); prog_en = 1; prog_op = op; prog_row = 2'(r); prog_col = 2'(c); prog_dev = d; prog_state = mstate_t'(s);
    @(negedge clk); prog_en = 0;
  endtask
  task automatic pulse(input int r, input int c, input dev_sel_e d, input logic up, input int len);
    @(negedge clk); pulse_en = 1; pulse_row = 2'(r); pulse_col = 2'(c); pulse_dev = d; pulse_up = up;
    repeat (len) @(negedge clk);
    pulse_en = 0;
  endtask
  task automatic chk_state(input int r, input int c, input dev_sel_e d, input int exp, input string what);
    rd_row = 2'(r); rd_col = 2'(c); rd_dev = d; #1;
    checks++;
    if (int'(rd_state) != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, rd_state, exp); end
  endtask

  initial begin
    #1000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    prog_op = PROG_WRITE_STATE; prog_row = 0; prog_col = 0; prog_dev = DEV_PLUS; prog_state = 0;
    pulse_row = 0; pulse_col = 0; pulse_dev = DEV_PLUS; rd_row = 0; rd_col = 0; rd_dev = DEV_PLUS;
    foreach (v_row[r]) v_row[r] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (sp[r, c]) begin sp[r][c] = MEM_STEPS/2; sm[r][c] = MEM_STEPS/2; end
    // random weights
    foreach (sp[r, c]) begin
      sp[r][c] = $urandom_range(0, MEM_STEPS); prog(PROG_WRITE_STATE, r, c, DEV_PLUS, sp[r][c]);
      sm[r][c] = $urandom_range(0, MEM_STEPS); prog(PROG_WRITE_STATE, r, c, DEV_MINUS, sm[r][c]);
    end
    for (int t = 0; t < 20; t++) begin
      foreach (v_row[r]) v_row[r] = vsig_t'($urandom_range(0, 2*ONE)) - vsig_t'(ONE);
      #1 chk_sums("weights");
    end
    // Ziksa prune of (1,2): weight zero
    prog(PROG_PRUNE, 1, 2, DEV_PLUS, 0); sp[1][2] = sm[1][2];
    chk_state(1, 2, DEV_PLUS, sm[1][2], "prune");
    // stuck-on M+ of (2,0), then prune sets M- to it; writes to M+ ignored
    prog(PROG_STUCK_ON, 2, 0, DEV_PLUS, 0); sp[2][0] = MEM_STEPS;
    prog(PROG_WRITE_STATE, 2, 0, DEV_PLUS, 3);
    chk_state(2, 0, DEV_PLUS, MEM_STEPS, "stuck-on ignores write");
    prog(PROG_PRUNE, 2, 0, DEV_PLUS, 0); sm[2][0] = MEM_STEPS;
    chk_state(2, 0, DEV_MINUS, MEM_STEPS, "prune around stuck device");
    prog(PROG_STUCK_OFF, 3, 1, DEV_MINUS, 0); sm[3][1] = 0;
    pulse(3, 1, DEV_MINUS, 1'b1, 4);
    chk_state(3, 1, DEV_MINUS, 0, "stuck-off ignores pulse");
    foreach (v_row[r]) v_row[r] = vsig_t'($urandom_range(0, 2*ONE)) - vsig_t'(ONE);
    #1 chk_sums("after faults");
    // pulses: up by len, down by len, saturating
    prog(PROG_WRITE_STATE, 0, 1, DEV_MINUS, 10); sm[0][1] = 10;
    pulse(0, 1, DEV_MINUS, 1'b1, 5); sm[0][1] = 15;
    chk_state(0, 1, DEV_MINUS, 15, "set pulse");
    pulse(0, 1, DEV_MINUS, 1'b0, 3); sm[0][1] = 12;
    chk_state(0, 1, DEV_MINUS, 12, "reset pulse");
    pulse(0, 1, DEV_MINUS, 1'b0, 20); sm[0][1] = 0;
    chk_state(0, 1, DEV_MINUS, 0, "saturate at 0");
    #1 chk_sums("after pulses");
    // endurance: after END pulses the device freezes
    checks++; if (wear_seen != 0) begin failures++; $display("FAIL early wearout"); end
    pulse(0, 1, DEV_MINUS, 1'b1, 2);            // 4th pulse of this device
    pulse(0, 1, DEV_MINUS, 1'b1, 2);            // 5th
    pulse(0, 1, DEV_MINUS, 1'b1, 2);            // 6th: reaches END, frozen after this clock
    @(negedge clk);
    checks++; if (wear_seen != 1) begin failures++; $display("FAIL wearout count %0d", wear_seen); end
    rd_row = 0; rd_col = 1; rd_dev = DEV_MINUS; #1;
    sm[0][1] = int'(rd_state);
    checks++; if (sm[0][1] != 5) begin failures++; $display("FAIL worn state %0d", sm[0][1]); end
    pulse(0, 1, DEV_MINUS, 1'b1, 5);
    chk_state(0, 1, DEV_MINUS, 5, "worn device frozen");
    prog(PROG_CLEAR_FAULT, 3, 1, DEV_MINUS, 0);
    pulse(3, 1, DEV_MINUS, 1'b1, 3); sm[3][1] = 3;
    chk_state(3, 1, DEV_MINUS, 3, "fault cleared");
    #1 chk_sums("final");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_gps_hybrid_ctrl: self-checking test of the hybrid control logic.
//
// Follows the controller for ten cycles after each start pulse and compares
// every output with the step table of the unit: digits 7..0 of the
// challenge issued in steps 0..7, accumulator clear in step 0, accumulate in
// steps 1..8, r_i select, unshifted feedback, y_valid and done in step 9
// only. Also checks that a start while busy is ignored and that the unit is
// idle afterwards.
module tb_gps_hybrid_ctrl;
  import gps_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [C_W-1:0] n_v = '0;
  logic busy, kcm_en, acc_clr, acc_en, shift_fb, sel_r, y_valid, done;
  logic [DIGIT_W-1:0] digit;
  int checks = 0, failures = 0;

  gps_hybrid_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what, input int t);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL step %0d: %s", t, what);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [C_W-1:0] c);
    @(negedge clk);
    n_v = c; start = 1;
    @(negedge clk);
    start = 0; n_v = ~c;
    for (int t = 0; t < 10; t++) begin
      if (t == 3) start = 1;
      if (t == 4) start = 0;
      chk(busy, "busy", t);
      chk(kcm_en == (t < 8), "kcm_en", t);
      if (t < 8) chk(digit == c[(7-t)*4 +: 4], "digit", t);
      chk(acc_clr == (t == 0), "acc_clr", t);
      chk(acc_en == (t >= 1 && t <= 8), "acc_en", t);
      chk(sel_r == (t == 9), "sel_r", t);
      chk(shift_fb == (t != 9), "shift_fb", t);
      chk(y_valid == (t == 9) && done == (t == 9), "y_valid/done", t);
      @(negedge clk);
    end
    chk(!busy && !done, "idle", 10);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(32'h1234_5678);
    run(32'hFEDC_BA98);
    for (int i = 0; i < 20; i++) run(32'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

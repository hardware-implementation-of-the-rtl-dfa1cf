// tb_gps_serial_ctrl: self-checking test of the serial control logic.
//
// For several challenges, follows the controller cycle by cycle from the
// start pulse and compares each control output with the schedule worked out
// here from the cycle number t: pass p = t / 12 handles challenge bit 31-p
// and word k = t % 12 for t < 384; cycles 384..398 are the r_i pass over
// words 0..14. Checks the operand selects, the write-back mode, the word
// indices, busy, y_valid, done in cycle 398 only, and that a start while
// busy is ignored.
module tb_gps_serial_ctrl;
  import gps_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [C_W-1:0] n_v = '0;
  logic busy, sel_r, sel_s, first_word, shift, y_valid, done;
  logic [$clog2(S_WORDS)-1:0] s_idx;
  logic [$clog2(R_WORDS)-1:0] r_idx;
  wr_mode_e wr_mode;
  int checks = 0, failures = 0;

  gps_serial_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what, input int t);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL t=%0d: %s", t, what);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [C_W-1:0] c);
    @(negedge clk);
    n_v = c; start = 1;
    @(negedge clk);
    start = 0; n_v = ~c;   // must have been latched
    for (int t = 0; t < 399; t++) begin
      int p, k, b;
      bit mul;
      mul = (t < 384);
      p = t / 12; k = mul ? t % 12 : t - 384; b = 31 - p;
      if (t == 100) start = 1;      // ignored while busy
      if (t == 101) start = 0;
      chk(busy && shift, "busy/shift", t);
      chk(sel_r == !mul, "sel_r", t);
      chk(sel_s == (mul && c[b] && k < 8), "sel_s", t);
      chk(first_word == (k == 0), "first_word", t);
      if (mul) chk(s_idx == 3'(k), "s_idx", t);
      else     chk(r_idx == 4'(k), "r_idx", t);
      chk(wr_mode == (!mul ? WR_ZERO : (b == 0 ? WR_PLAIN : WR_DOUBLE)), "wr_mode", t);
      chk(y_valid == !mul, "y_valid", t);
      chk(done == (t == 398), "done", t);
      @(negedge clk);
    end
    chk(!busy && !done && !y_valid, "idle after done", 399);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(32'h8000_0001);
    run(32'hFFFF_FFFF);
    run(32'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

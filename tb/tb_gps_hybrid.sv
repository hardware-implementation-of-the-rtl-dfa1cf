// tb_gps_hybrid: self-checking test of the digit-serial (hybrid) GPS unit.
//
// Starts the unit with a challenge, holds r_i, waits for y_valid and
// compares y with (r_i + s * n_V) mod 2^240 computed here. Covers n_V = 0,
// all ones, r_i all ones (y wraps) and random pairs, back to back. Checks
// that y_valid and done come exactly 10 cycles after start.
module tb_gps_hybrid;
  import gps_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [C_W-1:0] n_v = '0;
  logic [R_W-1:0] r_i = '0, y;
  logic busy, y_valid, done;
  int checks = 0, failures = 0;

  gps_hybrid dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [C_W-1:0] c, input logic [R_W-1:0] r);
    int cyc;
    @(negedge clk);
    n_v = c; r_i = r; start = 1;
    @(negedge clk);
    start = 0; n_v = ~c;
    cyc = 1;
    while (!y_valid && cyc < 100) begin
      @(negedge clk);
      cyc++;
    end
    checks += 3;
    if (y !== r + R_W'(S_DEFAULT) * R_W'(c)) begin
      failures++;
      $display("FAIL n_v=%h r=%h\n  y=%h", c, r, y);
    end
    if (cyc != 10) begin
      failures++;
      $display("FAIL latency %0d, expected 10", cyc);
    end
    if (!done) begin
      failures++;
      $display("FAIL done not with y_valid");
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run('0, {8{30'h2468_ACE1}});
    run('1, '0);
    run('1, {R_W{1'b1}});
    run(32'h0000_000F, {R_W{1'b1}});
    for (int i = 0; i < 200; i++)
      run(32'($urandom), R_W'({$urandom, $urandom, $urandom, $urandom, $urandom,
                          $urandom, $urandom, $urandom}));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

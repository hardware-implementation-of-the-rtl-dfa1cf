// tb_gps_serial: self-checking test of the word-serial GPS response unit.
//
// Serves r_i word by word from a register, collects the 15 y words and
// compares y with (r_i + s * n_V) mod 2^240 computed here with wide
// arithmetic. Covers n_V = 0, all ones, a single high bit, r_i all ones (y
// wraps) and random pairs. Checks that done comes 399 cycles after start
// and that the y words arrive in order 0..14.
module tb_gps_serial;
  import gps_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [C_W-1:0] n_v = '0;
  logic busy, y_valid, done;
  logic [$clog2(R_WORDS)-1:0] r_idx;
  logic [WORD_W-1:0] r_word, y_word;
  logic [R_W-1:0] r_reg = '0;
  int checks = 0, failures = 0;

  gps_serial dut (.*);

  assign r_word = r_reg[r_idx*WORD_W +: WORD_W];

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [C_W-1:0] c, input logic [R_W-1:0] r);
    logic [R_W-1:0] y, exp;
    int cyc, nw;
    @(negedge clk);
    n_v = c; r_reg = r; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1; nw = 0; y = '0;
    while (!done && cyc < 1000) begin
      if (y_valid) begin
        if (r_idx != 4'(nw)) begin
          failures++;
          $display("FAIL word order %0d vs %0d", r_idx, nw);
        end
        y[r_idx*WORD_W +: WORD_W] = y_word;
        nw++;
      end
      @(negedge clk);
      cyc++;
    end
    y[r_idx*WORD_W +: WORD_W] = y_word;
    nw++;
    exp = r + R_W'(S_DEFAULT) * R_W'(c);
    checks += 3;
    if (y !== exp) begin
      failures++;
      $display("FAIL n_v=%h\n  y  =%h\n  exp=%h", c, y, exp);
    end
    if (cyc != 399) begin
      failures++;
      $display("FAIL latency %0d, expected 399", cyc);
    end
    if (nw != 15) begin
      failures++;
      $display("FAIL %0d y words", nw);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run('0, {8{30'h1234_5678}});
    run('1, '0);
    run(32'h8000_0000, {R_W{1'b1}});
    run('1, {R_W{1'b1}});
    for (int i = 0; i < 12; i++)
      run(32'($urandom), R_W'({$urandom, $urandom, $urandom, $urandom, $urandom,
                          $urandom, $urandom, $urandom}));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

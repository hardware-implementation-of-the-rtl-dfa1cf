// tb_gps_parallel: self-checking test of the fully parallel GPS unit.
//
// Issues a new challenge every cycle (with gaps now and then), presents each
// challenge's r_i one cycle later and compares y with
// (r_i + s * n_V) mod 2^240 computed here. Checks the one-cycle latency of
// y_valid and that y_valid stays low in the gaps.
module tb_gps_parallel;
  import gps_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [C_W-1:0] n_v = '0;
  logic [R_W-1:0] r_i = '0, y;
  logic y_valid;
  logic [C_W-1:0] c_q;
  logic [R_W-1:0] r_next;
  logic start_q;
  int checks = 0, failures = 0;

  gps_parallel dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [R_W-1:0] rand_r();
    return R_W'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
                 $urandom, $urandom});
  endfunction

  initial begin
    start_q = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      // check the challenge issued in the previous cycle
      checks++;
      if (y_valid !== start_q) begin
        failures++;
        $display("FAIL cycle %0d: y_valid=%b expected %b", i, y_valid, start_q);
      end
      if (start_q) begin
        checks++;
        if (y !== r_i + R_W'(S_DEFAULT) * R_W'(c_q)) begin
          failures++;
          $display("FAIL n_v=%h y=%h", c_q, y);
        end
      end
      // issue the next one
      start_q = ($urandom_range(0, 4) != 0);
      c_q     = (i == 1) ? '1 : (i == 2) ? '0 : 32'($urandom);
      start   = start_q;
      n_v     = c_q;
      r_next  = (i == 3) ? {R_W{1'b1}} : rand_r();
      @(posedge clk);
      #1 r_i = r_next;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_gps_auth: end-to-end test of the GPS response unit at full size.
//
// Runs the top with all parameters at their defaults through a sequence of
// challenges, switching between the serial, parallel and hybrid
// architectures, and compares every response with (r_i + s * n_V) mod 2^240
// computed here. Checks the cycles from start to done (serial 400, parallel
// 2, hybrid 11), that y holds after done, and that a start while busy is
// ignored. Counts how often each mechanism occurred and fails if one never
// did: each architecture, an architecture switch between two requests, an
// ignored start, and a response that wraps past 2^240.
module tb_gps_auth;
  import gps_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  arch_e arch = ARCH_SERIAL;
  logic [C_W-1:0] n_v = '0;
  logic [R_W-1:0] r_i = '0, y;
  logic busy, done;
  int checks = 0, failures = 0;
  int n_arch [3] = '{0, 0, 0};
  int n_switch = 0, n_ignored = 0, n_wrap = 0;
  arch_e last_arch = ARCH_SERIAL;

  gps_auth dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input arch_e a, input logic [C_W-1:0] c,
                     input logic [R_W-1:0] r, input bit poke);
    logic [R_W:0] full;
    int cyc, lat;
    lat = (a == ARCH_SERIAL) ? 400 : (a == ARCH_PARALLEL) ? 2 : 11;
    @(negedge clk);
    arch = a; n_v = c; r_i = r; start = 1;
    @(negedge clk);
    start = 0; n_v = ~c;
    cyc = 1;
    while (!done && cyc < 1000) begin
      if (poke && cyc == 5 && busy) begin
        // a second request while busy must change nothing
        start = 1; arch = ARCH_PARALLEL; n_v = 32'hDEAD_BEEF;
        n_ignored++;
      end else begin
        start = 0;
      end
      @(negedge clk);
      cyc++;
    end
    full = (R_W+1)'(r) + (R_W+1)'(S_DEFAULT) * (R_W+1)'(c);
    checks += 3;
    if (y !== full[R_W-1:0]) begin
      failures++;
      $display("FAIL arch=%s n_v=%h\n  y  =%h\n  exp=%h", a.name(), c, y, full[R_W-1:0]);
    end
    if (cyc != lat) begin
      failures++;
      $display("FAIL arch=%s latency %0d, expected %0d", a.name(), cyc, lat);
    end
    @(negedge clk);
    if (y !== full[R_W-1:0] || done || busy) begin
      failures++;
      $display("FAIL y not held or unit not idle after done");
    end
    if (full[R_W]) n_wrap++;
    if (a != last_arch) n_switch++;
    last_arch = a;
    n_arch[int'(a)]++;
  endtask

  function automatic logic [R_W-1:0] rand_r();
    return R_W'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
                 $urandom, $urandom});
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(ARCH_SERIAL,   '1, {R_W{1'b1}}, 1'b1);
    run(ARCH_PARALLEL, '1, {R_W{1'b1}}, 1'b0);
    run(ARCH_HYBRID,   '1, {R_W{1'b1}}, 1'b1);
    for (int i = 0; i < 60; i++) begin
      arch_e a;
      a = arch_e'($urandom_range(0, 2));
      run(a, 32'($urandom), rand_r(), ($urandom_range(0, 3) == 0));
    end
    $display("serial %0d, parallel %0d, hybrid %0d, switches %0d, ignored starts %0d, wraps %0d",
             n_arch[0], n_arch[1], n_arch[2], n_switch, n_ignored, n_wrap);
    checks += 6;
    if (n_arch[0] == 0 || n_arch[1] == 0 || n_arch[2] == 0) failures++;
    if (n_switch == 0)  failures++;
    if (n_ignored == 0) failures++;
    if (n_wrap == 0)    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_gps_kcm: self-checking test of the constant-coefficient multiplier.
//
// Builds the 32-bit, 4-bit-digit multiplier of the parallel architecture and
// the single-digit one of the hybrid architecture with the default secret,
// and compares every product with a plain multiplication done here.
// Inputs: all 16 single digits, corner challenges and random challenges.
module tb_gps_kcm;
  import gps_pkg::*;

  logic [C_W-1:0]       x32;
  logic [P_W-1:0]       p32;
  logic [DIGIT_W-1:0]   x4;
  logic [S_W+DIGIT_W-1:0] p4;
  int checks = 0, failures = 0;

  gps_kcm #(.IN_W(C_W))     u32 (.x(x32), .p(p32));
  gps_kcm #(.IN_W(DIGIT_W)) u4  (.x(x4),  .p(p4));

  task automatic check32(input logic [C_W-1:0] v);
    logic [P_W-1:0] exp;
    x32 = v;
    #1;
    exp = P_W'(S_DEFAULT) * P_W'(v);
    checks++;
    if (p32 !== exp) begin
      failures++;
      $display("FAIL x=%h p=%h exp=%h", v, p32, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < 16; d++) begin
      x4 = DIGIT_W'(d);
      #1;
      checks++;
      if (p4 !== (S_W+DIGIT_W)'(S_DEFAULT) * (S_W+DIGIT_W)'(d)) begin
        failures++;
        $display("FAIL digit %0d p=%h", d, p4);
      end
    end
    check32('0);
    check32('1);
    check32(32'h8000_0000);
    check32(32'h0000_0001);
    for (int i = 0; i < 200; i++) check32($urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

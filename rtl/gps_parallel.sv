// gps_parallel: fully parallel GPS response unit, y = r_i + s * n_V.
//
// The whole 32-bit challenge goes through the constant multiplier
// KCM_{32,4}(s) in one cycle; its 160-bit product is registered, and a
// 240-bit adder adds r_i to it in the next cycle. The unit is pipelined: a
// new challenge can be given every cycle.
//
// Interface: n_v is taken when start is high. y_valid rises one cycle later;
// r_i of that challenge must be on its input in that cycle, and y is the
// adder output of that cycle.
//
// The datapath is the parallel architecture drawing; the valid flag that
// travels with the product register is this design's own.
module gps_parallel
  import gps_pkg::*;
#(
  parameter logic [S_W-1:0] SECRET = S_DEFAULT
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [C_W-1:0] n_v,
  input  logic [R_W-1:0] r_i,
  output logic [R_W-1:0] y,
  output logic           y_valid
);

  logic [P_W-1:0] prod, prod_q;
  logic           valid_q;

  gps_kcm #(.IN_W(C_W), .DIGIT_W(DIGIT_W), .S_W(S_W), .S(SECRET)) u_kcm (
    .x(n_v), .p(prod)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod_q  <= '0;
      valid_q <= 1'b0;
    end else begin
      valid_q <= start;
      if (start) prod_q <= prod;
    end
  end

  assign y       = R_W'(prod_q) + r_i;
  assign y_valid = valid_q;

endmodule

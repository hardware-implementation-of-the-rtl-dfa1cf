// gps_hybrid: digit-serial (hybrid) GPS response unit, y = r_i + s * n_V.
//
// The challenge enters a small constant multiplier KCM_{4,4}(s) one 4-bit
// digit per cycle; its 132-bit product is registered. A 240-bit adder adds
// that product to the 160-bit accumulator shifted left by one digit (the
// 164-bit feedback {acc, 4'b0}), so after the eight digits the accumulator
// holds s * n_V by Horner's rule in radix 16. In the last step a multiplexer
// hands the adder r_i instead of the product and the feedback is taken
// unshifted, giving y = s * n_V + r_i on the 240-bit output.
//
// Interface: pulse start with n_v while busy is low. r_i must hold its value
// in the cycle y_valid is high; y is the adder output, valid in that cycle,
// which is also the done cycle, 10 cycles after start.
//
// The datapath is the hybrid architecture drawing; the unshifted feedback of
// the last step is this design's own (without it the drawn loop would
// return 16 * s * n_V + r_i), and so is the accumulator clear.
module gps_hybrid
  import gps_pkg::*;
#(
  parameter logic [S_W-1:0] SECRET = S_DEFAULT
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [C_W-1:0] n_v,
  input  logic [R_W-1:0] r_i,
  output logic           busy,
  output logic [R_W-1:0] y,
  output logic           y_valid,
  output logic           done
);

  localparam int unsigned KP_W = S_W + DIGIT_W;  // 132
  localparam int unsigned FB_W = P_W + DIGIT_W;  // 164

  logic [DIGIT_W-1:0] digit;
  logic               kcm_en, acc_clr, acc_en, shift_fb, sel_r;

  gps_hybrid_ctrl u_ctrl (
    .clk, .rst_n, .start, .n_v, .busy,
    .digit, .kcm_en, .acc_clr, .acc_en, .shift_fb, .sel_r, .y_valid, .done
  );

  logic [KP_W-1:0] kp, kp_q;
  logic [P_W-1:0]  acc_q;
  logic [FB_W-1:0] fb;
  logic [R_W-1:0]  op, sum;

  gps_kcm #(.IN_W(DIGIT_W), .DIGIT_W(DIGIT_W), .S_W(S_W), .S(SECRET)) u_kcm (
    .x(digit), .p(kp)
  );

  always_comb begin
    fb  = shift_fb ? {acc_q, {DIGIT_W{1'b0}}} : FB_W'(acc_q);
    op  = sel_r ? r_i : R_W'(kp_q);
    sum = R_W'(fb) + op;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kp_q  <= '0;
      acc_q <= '0;
    end else begin
      if (kcm_en)       kp_q  <= kp;
      if (acc_clr)      acc_q <= '0;
      else if (acc_en)  acc_q <= sum[P_W-1:0];
    end
  end

  assign y = sum;

endmodule

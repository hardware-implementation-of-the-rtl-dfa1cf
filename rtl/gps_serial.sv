// gps_serial: word-serial GPS response unit, y = r_i + s * n_V.
//
// A 16-bit adder closes a loop through the 12-word accumulator buffer
// (gps_shift_buffer). Its other operand comes from two multiplexers: the
// first picks word k of the secret s or zero, depending on the current
// challenge bit; the second picks that or word k of r_i. A carry flip-flop
// chains the word additions of one pass. On the way back into the buffer the
// sum is shifted left by one bit across word boundaries: 15 bits of the sum
// go straight in, and its top bit waits one cycle in a 1-bit register to
// become the bottom bit of the next word. gps_serial_ctrl sequences the 32
// multiply passes and the r_i pass.
//
// Interface: pulse start with n_v in the idle state (busy low). The unit
// asks for r_i one word at a time, r_word must be word r_idx of r_i in the
// same cycle (a combinational read of a coupon memory or register). y is
// produced least significant word first on y_word, tagged by y_valid and
// r_idx; done is high with the last word. 399 cycles from start to done.
//
// The datapath is the serial architecture drawing. This design adds the
// carry flip-flop, the unshifted and zero write-back modes and the word
// indices; s is the SECRET parameter.
module gps_serial
  import gps_pkg::*;
#(
  parameter logic [S_W-1:0] SECRET = S_DEFAULT
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [C_W-1:0]             n_v,
  output logic                       busy,
  output logic [$clog2(R_WORDS)-1:0] r_idx,
  input  logic [WORD_W-1:0]          r_word,
  output logic [WORD_W-1:0]          y_word,
  output logic                       y_valid,
  output logic                       done
);

  logic                         sel_r, sel_s, first_word, shift;
  logic [$clog2(S_WORDS)-1:0]   s_idx;
  wr_mode_e                     wr_mode;

  gps_serial_ctrl u_ctrl (
    .clk, .rst_n, .start, .n_v, .busy,
    .sel_r, .sel_s, .s_idx, .r_idx, .first_word, .shift, .wr_mode,
    .y_valid, .done
  );

  logic [WORD_W-1:0] acc_word, wb_word, s_word, op_s, op;
  logic [WORD_W:0]   sum_full;
  logic [WORD_W-1:0] sum;
  logic              carry_q, msb_q;

  gps_shift_buffer #(.WIDTH(WORD_W), .DEPTH(BUF_WORDS)) u_buf (
    .clk, .rst_n, .shift, .d_in(wb_word), .d_out(acc_word)
  );

  always_comb begin
    s_word   = SECRET[s_idx*WORD_W +: WORD_W];
    op_s     = sel_s ? s_word : '0;
    op       = sel_r ? r_word : op_s;
    sum_full = {1'b0, acc_word} + {1'b0, op} + (WORD_W+1)'(first_word ? 1'b0 : carry_q);
    sum      = sum_full[WORD_W-1:0];
    unique case (wr_mode)
      WR_DOUBLE: wb_word = {sum[WORD_W-2:0], first_word ? 1'b0 : msb_q};
      WR_PLAIN:  wb_word = sum;
      default:   wb_word = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      carry_q <= 1'b0;
      msb_q   <= 1'b0;
    end else if (shift) begin
      carry_q <= sum_full[WORD_W];
      msb_q   <= sum[WORD_W-1];
    end
  end

  assign y_word = sum;

endmodule

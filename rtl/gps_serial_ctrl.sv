// gps_serial_ctrl: control logic of the word-serial GPS response unit.
//
// Computes the schedule of y = r_i + s * n_V on a 16-bit datapath. After
// start it runs one multiply pass per challenge bit, most significant bit
// first; a pass visits the BUF_WORDS words of the accumulator buffer, least
// significant first, one word per cycle. In a pass the adder's second
// operand is word k of s when the current challenge bit is 1 and k is inside
// s, and zero otherwise. Every pass but the last writes the sum back doubled
// (Horner's rule, acc = 2*acc + c_j*s); the last writes it back unshifted.
// Then one pass of R_WORDS cycles adds r_i word by word and emits y; it
// writes zeros back, so the buffer is clear for the next challenge.
//
// Timing: start is taken in the idle state only. The multiply passes take
// C_W*BUF_WORDS cycles (384), the r_i pass R_WORDS cycles (15): y word k is
// valid in cycle 385+k after the start cycle, done is high with word 14.
//
// The passes, the operand multiplexers and the doubling write-back follow
// the serial architecture drawing. The unshifted write of the last pass and
// the zero write of the r_i pass are this design's own: without them the
// drawn loop would return 2*s*n_V, and the r_i pass would read back its own
// writes beyond the 12-word buffer.
module gps_serial_ctrl
  import gps_pkg::*;
#(
  parameter int unsigned CW    = C_W,
  parameter int unsigned NBUF  = BUF_WORDS,
  parameter int unsigned NS    = S_WORDS,
  parameter int unsigned NR    = R_WORDS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [CW-1:0]            n_v,
  output logic                     busy,
  output logic                     sel_r,      // 1: adder takes r_i word
  output logic                     sel_s,      // 1: s word, 0: zero
  output logic [$clog2(NS)-1:0]    s_idx,
  output logic [$clog2(NR)-1:0]    r_idx,      // word index in the r_i pass
  output logic                     first_word, // clears the carry and shift bit
  output logic                     shift,      // buffer moves
  output wr_mode_e                 wr_mode,
  output logic                     y_valid,
  output logic                     done
);

  localparam int unsigned KW = $clog2(NR > NBUF ? NR : NBUF);

  typedef enum logic [1:0] {S_IDLE, S_MUL, S_RADD} state_e;

  state_e              state_q;
  logic [CW-1:0]       chal_q;
  logic [$clog2(CW)-1:0] bit_q;
  logic [KW-1:0]       k_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      chal_q  <= '0;
      bit_q   <= '0;
      k_q     <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start) begin
          chal_q  <= n_v;
          bit_q   <= ($clog2(CW))'(CW-1);
          k_q     <= '0;
          state_q <= S_MUL;
        end
        S_MUL: begin
          if (k_q == KW'(NBUF-1)) begin
            k_q <= '0;
            if (bit_q == '0) state_q <= S_RADD;
            else             bit_q   <= bit_q - 1'b1;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end
        S_RADD: begin
          if (k_q == KW'(NR-1)) begin
            k_q     <= '0;
            state_q <= S_IDLE;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy       = (state_q != S_IDLE);
    sel_r      = (state_q == S_RADD);
    sel_s      = (state_q == S_MUL) && chal_q[bit_q] && (k_q < KW'(NS));
    s_idx      = k_q[$clog2(NS)-1:0];
    r_idx      = k_q[$clog2(NR)-1:0];
    first_word = (k_q == '0);
    shift      = (state_q != S_IDLE);
    y_valid    = (state_q == S_RADD);
    done       = (state_q == S_RADD) && (k_q == KW'(NR-1));
    if (state_q == S_RADD)  wr_mode = WR_ZERO;
    else if (bit_q == '0)   wr_mode = WR_PLAIN;
    else                    wr_mode = WR_DOUBLE;
  end

  // The r_i operand and the s operand are never requested together, and
  // done only comes with a y word.
  a_one_operand: assert property (@(posedge clk) !(sel_r && sel_s));
  a_done_word:   assert property (@(posedge clk) done |-> y_valid);

endmodule

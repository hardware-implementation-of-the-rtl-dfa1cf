// gps_pkg: sizes and shared types of the GPS response units.
//
// The prover of the GPS (Girault-Poupard-Stern) identification scheme answers
// a verifier's challenge n_V with y = r_i + s * n_V, where s is the prover's
// secret and r_i the random number behind the commitment it sent earlier.
// The widths below follow the architecture drawings: a 32-bit challenge, a
// 128-bit secret (the 32-bit challenge times s gives a 160-bit product, a
// 4-bit digit times s a 132-bit one), and a 240-bit r_i and y. The serial
// architecture works on 16-bit words with a 12-word accumulator buffer; the
// hybrid one on 4-bit challenge digits with a 160-bit accumulator.
// The value of the secret is only an example: it is a constant
// baked into the multipliers and is meant to be overridden per device.
package gps_pkg;

  parameter int unsigned C_W     = 32;   // challenge n_V
  parameter int unsigned S_W     = 128;  // secret s
  parameter int unsigned R_W     = 240;  // r_i and y
  parameter int unsigned P_W     = S_W + C_W;  // s * n_V, 160 bits
  parameter int unsigned DIGIT_W = 4;    // KCM digit

  // Serial architecture
  parameter int unsigned WORD_W    = 16;            // datapath word
  parameter int unsigned BUF_WORDS = 12;            // accumulator buffer depth
  parameter int unsigned S_WORDS   = S_W / WORD_W;  // 8
  parameter int unsigned R_WORDS   = R_W / WORD_W;  // 15

  // Default secret (an example value, override per device)
  parameter logic [S_W-1:0] S_DEFAULT = 128'hB7E1_5162_8AED_2A6A_BF71_5880_9CF4_F3C7;

  // Architecture selector of the top level
  typedef enum logic [1:0] {
    ARCH_SERIAL   = 2'd0,
    ARCH_PARALLEL = 2'd1,
    ARCH_HYBRID   = 2'd2
  } arch_e;

  // Write-back modes of the serial accumulator buffer
  typedef enum logic [1:0] {
    WR_DOUBLE = 2'd0,  // store 2 * sum (the 1-bit register shift of the drawing)
    WR_PLAIN  = 2'd1,  // store sum unshifted (last challenge bit)
    WR_ZERO   = 2'd2   // store 0 (r_i pass, clears the buffer)
  } wr_mode_e;

endpackage

// gps_auth: GPS prover response unit with the three datapath architectures.
//
// The prover of the GPS identification scheme answers the verifier's 32-bit
// challenge n_V with y = r_i + s * n_V, where s is its 128-bit secret and r_i
// the 240-bit random number of the commitment it sent before. This top holds
// the three architectures of the design side by side: the word-serial unit
// (smallest, 399 cycles), the fully parallel unit (one KCM_{32,4}(s), 2
// cycles) and the hybrid digit-serial unit (KCM_{4,4}(s), 10 cycles). The
// arch input picks the one that serves a request; all three share the secret.
//
// Interface: while busy is low, pulse start with n_v and arch. r_i must hold
// its value from start until done. y is registered and keeps the last
// response; done pulses for one cycle when y is updated. Starts while busy
// are ignored. Cycles from start to done (done included): serial 400,
// parallel 2, hybrid 11 (each unit's own latency plus the y register).
//
// The three units are those of the architecture drawings. Putting them
// behind one request interface with a selector, the r_i word select for the
// serial unit and the y register are this design's own; a product would
// normally keep just one of the three.
module gps_auth
  import gps_pkg::*;
#(
  parameter logic [S_W-1:0] SECRET = S_DEFAULT
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  arch_e          arch,
  input  logic [C_W-1:0] n_v,
  input  logic [R_W-1:0] r_i,
  output logic           busy,
  output logic [R_W-1:0] y,
  output logic           done
);

  localparam int unsigned RIW = $clog2(R_WORDS);

  logic  busy_q;
  arch_e arch_q;
  logic  accept;

  assign accept = start && !busy_q;

  // Serial unit
  logic              ser_busy, ser_yv, ser_done;
  logic [RIW-1:0]    ser_ridx;
  logic [WORD_W-1:0] ser_rword, ser_yword;

  gps_serial #(.SECRET(SECRET)) u_serial (
    .clk, .rst_n, .start(accept && arch == ARCH_SERIAL), .n_v,
    .busy(ser_busy), .r_idx(ser_ridx), .r_word(ser_rword),
    .y_word(ser_yword), .y_valid(ser_yv), .done(ser_done)
  );
  assign ser_rword = r_i[ser_ridx*WORD_W +: WORD_W];

  // Parallel unit
  logic [R_W-1:0] par_y;
  logic           par_yv;

  gps_parallel #(.SECRET(SECRET)) u_parallel (
    .clk, .rst_n, .start(accept && arch == ARCH_PARALLEL), .n_v, .r_i,
    .y(par_y), .y_valid(par_yv)
  );

  // Hybrid unit
  logic [R_W-1:0] hyb_y;
  logic           hyb_busy, hyb_yv, hyb_done;

  gps_hybrid #(.SECRET(SECRET)) u_hybrid (
    .clk, .rst_n, .start(accept && arch == ARCH_HYBRID), .n_v, .r_i,
    .busy(hyb_busy), .y(hyb_y), .y_valid(hyb_yv), .done(hyb_done)
  );

  logic unit_done;
  always_comb begin
    unique case (arch_q)
      ARCH_SERIAL:   unit_done = ser_done;
      ARCH_PARALLEL: unit_done = par_yv;
      default:       unit_done = hyb_done;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      arch_q <= ARCH_SERIAL;
      y      <= '0;
      done   <= 1'b0;
    end else begin
      done <= busy_q && unit_done;
      if (accept) begin
        busy_q <= 1'b1;
        arch_q <= (arch == ARCH_SERIAL || arch == ARCH_PARALLEL) ? arch : ARCH_HYBRID;
      end else if (busy_q && unit_done) begin
        busy_q <= 1'b0;
      end
      if (busy_q) begin
        unique case (arch_q)
          ARCH_SERIAL:   if (ser_yv) y[ser_ridx*WORD_W +: WORD_W] <= ser_yword;
          ARCH_PARALLEL: if (par_yv) y <= par_y;
          default:       if (hyb_yv) y <= hyb_y;
        endcase
      end
    end
  end

  assign busy = busy_q;

  // A unit only reports activity while the top waits for it.
  a_one_unit: assert property (@(posedge clk)
                               !(ser_busy && hyb_busy));

endmodule

// gps_hybrid_ctrl: control logic of the digit-serial (hybrid) GPS unit.
//
// Cuts the latched challenge into C_W/4 digits and hands them to the
// single-digit multiplier KCM_{4,4}(s), most significant digit first, one
// per cycle. Because the multiplier output is registered, the accumulator
// takes the product of digit i one cycle after the digit was issued. The
// steps of one challenge, counted from the first cycle after start:
//   step 0          issue digit 7, clear the accumulator
//   step 1..7       issue digit 7-step, accumulate the product of the last
//   step 8          accumulate the product of digit 0
//   step 9          select r_i: y = acc + r_i is valid, done
// Ten cycles from start to done. start is taken in the idle state only.
//
// The digit feed and the operand select follow the hybrid architecture
// drawing; the step numbering, the accumulator clear and the unshifted
// feedback in the last step (shift_fb low) are this design's own.
module gps_hybrid_ctrl
  import gps_pkg::*;
#(
  parameter int unsigned CW = C_W,
  parameter int unsigned DW = DIGIT_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] n_v,
  output logic          busy,
  output logic [DW-1:0] digit,     // to KCM_{4,4}(s)
  output logic          kcm_en,    // load the product register
  output logic          acc_clr,   // clear the accumulator
  output logic          acc_en,    // load the accumulator with the sum
  output logic          shift_fb,  // feed back acc * 2^DW (else acc)
  output logic          sel_r,     // adder takes r_i instead of the product
  output logic          y_valid,
  output logic          done
);

  localparam int unsigned ND    = CW / DW;     // 8 digits
  localparam int unsigned LAST  = ND + 1;      // step of the r_i addition
  localparam int unsigned STW   = $clog2(LAST + 1);

  logic          run_q;
  logic [CW-1:0] chal_q;
  logic [STW-1:0] step_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q  <= 1'b0;
      chal_q <= '0;
      step_q <= '0;
    end else if (!run_q) begin
      if (start) begin
        run_q  <= 1'b1;
        chal_q <= n_v;
        step_q <= '0;
      end
    end else if (step_q == STW'(LAST)) begin
      run_q  <= 1'b0;
      step_q <= '0;
    end else begin
      step_q <= step_q + 1'b1;
    end
  end

  always_comb begin
    logic [STW-1:0] dsel;
    dsel     = STW'(ND - 1) - step_q;           // digit issued in this step
    busy     = run_q;
    kcm_en   = run_q && (step_q < STW'(ND));
    digit    = kcm_en ? chal_q[dsel*DW +: DW] : '0;
    acc_clr  = run_q && (step_q == '0);
    acc_en   = run_q && (step_q >= 1) && (step_q <= STW'(ND));
    sel_r    = run_q && (step_q == STW'(LAST));
    shift_fb = !sel_r;
    y_valid  = sel_r;
    done     = sel_r;
  end

  // The accumulator is never cleared and loaded in the same cycle, and it
  // is not loaded while r_i is on the adder.
  a_clr_or_load: assert property (@(posedge clk) !(acc_clr && acc_en));
  a_no_load_r:   assert property (@(posedge clk) !(sel_r && acc_en));

endmodule

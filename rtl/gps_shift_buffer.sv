// gps_shift_buffer: accumulator buffer of the serial architecture.
//
// WIDTH parallel shift registers, each DEPTH flip-flops long: a word written
// at d_in appears at d_out DEPTH shifts later. With the adder closing the
// loop from d_out back to d_in, the buffer holds a DEPTH-word number that
// circulates past the adder once every DEPTH cycles, least significant word
// first. The buffer moves only when shift is high, so it keeps its contents
// while the unit is idle. Reset clears it.
//
// The 16 x 12 register array follows the serial architecture drawing; the
// shift enable and the reset are this design's own.
module gps_shift_buffer #(
  parameter int unsigned WIDTH = gps_pkg::WORD_W,
  parameter int unsigned DEPTH = gps_pkg::BUF_WORDS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             shift,
  input  logic [WIDTH-1:0] d_in,
  output logic [WIDTH-1:0] d_out
);

  logic [WIDTH-1:0] stage [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < DEPTH; i++) stage[i] <= '0;
    end else if (shift) begin
      stage[0] <= d_in;
      for (int unsigned i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
    end
  end

  assign d_out = stage[DEPTH-1];

endmodule

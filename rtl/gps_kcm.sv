// gps_kcm: constant-coefficient multiplier KCM_{IN_W,DIGIT_W}(S).
//
// Multiplies the IN_W-bit input x by the constant S. The input is cut into
// DIGIT_W-bit digits; each digit looks up S * digit in a 2^DIGIT_W-entry
// table, and the table outputs, each shifted by its digit's weight, are
// summed. The table is computed at elaboration from S, so S is hard-wired
// into the logic, as a constant-coefficient multiplier is meant to be.
// Purely combinational: p is valid in the cycle x is.
//
// The multiplier's name and its two sizes (32-bit input with 4-bit digits in
// the parallel architecture, a single 4-bit digit in the hybrid one) come
// from the architecture drawings; the table-and-adder insides are the
// textbook KCM and this design's own choice of adder (a plain sum that
// synthesis maps to an adder chain).
module gps_kcm #(
  parameter int unsigned     IN_W    = gps_pkg::C_W,
  parameter int unsigned     DIGIT_W = gps_pkg::DIGIT_W,
  parameter int unsigned     S_W     = gps_pkg::S_W,
  parameter logic [S_W-1:0]  S       = gps_pkg::S_DEFAULT
) (
  input  logic [IN_W-1:0]      x,
  output logic [S_W+IN_W-1:0]  p
);

  localparam int unsigned N_DIG   = IN_W / DIGIT_W;
  localparam int unsigned ENTRIES = 1 << DIGIT_W;
  localparam int unsigned T_W     = S_W + DIGIT_W;

  typedef logic [T_W-1:0] entry_t;
  typedef entry_t table_t [ENTRIES];

  function automatic table_t build_table();
    table_t t;
    for (int unsigned d = 0; d < ENTRIES; d++)
      t[d] = T_W'(S) * T_W'(d);
    return t;
  endfunction

  localparam table_t TABLE = build_table();

  initial begin
    assert (IN_W % DIGIT_W == 0)
      else $error("gps_kcm: IN_W must be a multiple of DIGIT_W");
  end

  // One table lookup per digit, then the shifted sum of the lookups.
  logic [S_W+IN_W-1:0] pp [N_DIG];

  for (genvar i = 0; i < N_DIG; i++) begin : g_digit
    assign pp[i] = (S_W+IN_W)'(TABLE[x[i*DIGIT_W +: DIGIT_W]]) << (i*DIGIT_W);
  end

  always_comb begin
    p = '0;
    for (int unsigned i = 0; i < N_DIG; i++)
      p = p + pp[i];
  end

endmodule

// tanh_lut -- activation table of a digital p-bit.
//
// 256 words of 32 bits, addressed by the p-bit input I in s[4][3] two's
// complement (I = addr/8, -16 ... +15.875). Word a holds the threshold
// round(-tanh(BETA * I) * 2^31), clipped to the signed 32-bit range. A p-bit
// sets its output to 1 when its signed 32-bit random word r, uniform on
// [-2^31, 2^31), is greater than this threshold; then
// P(m = 1) = (1 + tanh(BETA*I)) / 2, the p-bit equation
// m = sgn(rand(-1,1) + tanh(BETA*I)). Size (2^8 x 32 bit) follows the paper;
// storing the negated tanh, so that the comparator is a plain greater-than,
// is this design's choice.
//
// The table is a constant computed at elaboration (see pbit_pkg::lut_word),
// so BETA = BETA_MILLI/1000, the inverse temperature, is fixed per build. Read is
// combinational.
module tanh_lut #(
  parameter int  W_IN  = 8,
  parameter int  W_OUT = 32,
  parameter int  BETA_MILLI = 1000
) (
  input  logic [W_IN-1:0]  addr,
  output logic [W_OUT-1:0] thr
);
  timeunit 1ns; timeprecision 1ps;

  localparam int DEPTH = 1 << W_IN;

  typedef logic [W_OUT-1:0] rom_t [DEPTH];

  function automatic rom_t build();
    rom_t r;
    for (int a = 0; a < DEPTH; a++) begin
      // address a is the two's complement code of a signed value
      int sv;
      sv = (a >= DEPTH/2) ? a - DEPTH : a;
      r[a] = pbit_pkg::lut_word(sv, real'(BETA_MILLI) / 1000.0);
    end
    return r;
  endfunction

  localparam rom_t ROM = build();

  always_comb thr = ROM[addr];
endmodule

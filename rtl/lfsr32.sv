// lfsr32 -- 32-bit linear feedback shift register, the pseudo-random number
// generator of one digital p-bit.
//
// Fibonacci form: on every cycle with `step` high the register shifts one
// place towards the MSB and the new bit 0 is the XNOR of the bits selected by
// TAPS (bit t-1 set for polynomial term x^t). With a primitive tap polynomial
// the sequence has period 2^32-1 and avoids the XNOR lock-up state, all ones.
// The whole register is used as the 32-bit random word, so consecutive words
// share 31 bits; that correlation is the known weakness of LFSR p-bits, which
// asynchronous sMTJ-driven stepping hides.
//
// Interface: `step` is a one-cycle clock enable (the p-bit's update strobe);
// `rnd` is the register itself. Reset loads SEED. Timing: `rnd` changes one
// cycle after a `step`. Tap and seed values are this design's choice.
module lfsr32 #(
  parameter int          WIDTH = 32,
  parameter logic [31:0] TAPS  = 32'hE0000200,
  parameter logic [31:0] SEED  = 32'h0000_0001
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step,
  output logic [WIDTH-1:0] rnd
);
  timeunit 1ns; timeprecision 1ps;

  logic fb;
  always_comb fb = ~(^(rnd & TAPS[WIDTH-1:0]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    rnd <= SEED[WIDTH-1:0];
    else if (step) rnd <= {rnd[WIDTH-2:0], fb};
  end

  initial assert (SEED[WIDTH-1:0] != '1) else $error("lfsr32: SEED is the XNOR lock-up state");
endmodule

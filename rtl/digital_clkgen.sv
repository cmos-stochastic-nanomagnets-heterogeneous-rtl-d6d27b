// digital_clkgen -- phase-shifted digital update clocks for the all-digital
// p-computer.
//
// In the all-digital configuration the p-bits are driven by NUM_CLK (five)
// clocks of equal frequency and shifted phases, slowed down by frequency
// dividers. Here they are clock enables made from the system clock: a counter
// runs from 0 to div-1 and strobe k fires when the counter equals
// k*div/NUM_CLK, so the strobes have period `div` cycles and are spread evenly
// over it. With a 75 MHz system clock, div = 5 gives 15 MHz and div = 37500
// gives 2 kHz, the two rates used in the paper. `div` below NUM_CLK is
// treated as NUM_CLK so that the strobes never coincide.
//
// Timing: a new `div` takes effect at once: if the counter is already past
// the new period it wraps on the next cycle, so a change from 37500 to 5 does
// not wait for a slow period to finish (one period may be irregular). Reset
// clears the counter; strobe 0 fires on the first cycle after reset.
module digital_clkgen #(
  parameter int NUM_CLK = 5,
  parameter int W_DIV   = 24
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [W_DIV-1:0]   div,
  output logic [NUM_CLK-1:0] tick
);
  timeunit 1ns; timeprecision 1ps;

  logic [W_DIV-1:0] cnt, period;
  logic [W_DIV-1:0] phase [NUM_CLK];

  always_comb period = (div < W_DIV'(NUM_CLK)) ? W_DIV'(NUM_CLK) : div;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    cnt <= '0;
    else if (cnt >= period - 1'b1) cnt <= '0;
    else                           cnt <= cnt + 1'b1;
  end

  always_comb begin
    for (int k = 0; k < NUM_CLK; k++) begin
      phase[k] = W_DIV'((32'(period) * k) / NUM_CLK);
      tick[k]  = (cnt == phase[k]);
    end
  end
endmodule

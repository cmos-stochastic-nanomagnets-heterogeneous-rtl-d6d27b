// pbit -- one digital probabilistic bit: tanh table, LFSR and comparator.
//
// On each update strobe `step` the p-bit draws a new binary state
//   m <= (rnd > thr(I)),   thr(I) = -tanh(BETA*I) * 2^31   (signed compare)
// which makes P(m = 1) = (1 + tanh(BETA*I))/2. The local field `field`
// (s[.][3], from pbit_mac) is first clipped to the 8-bit s[4][3] table range
// [-16, +15.875]; the tanh is saturated beyond it. The LFSR advances on the
// same strobe, so each update consumes one new LFSR word; the word compared is
// the one present before the strobe.
//
// Interface: `step` is a one-cycle enable in the system clock domain; it comes
// either from a divided digital clock or from the rising edge of an sMTJ
// p-bit's output, which is how the sMTJ "clocks" the p-bit. `m` and `rnd`
// change one cycle after `step`. Reset clears m and loads the LFSR seed.
// The three parts follow the FPGA p-bit of the paper; the clipping rule, the
// comparator's sign convention and the reset value are this design's choice.
module pbit #(
  parameter int          W_SUM = 15,
  parameter logic [31:0] TAPS  = 32'hE0000200,
  parameter logic [31:0] SEED  = 32'h0000_0001,
  parameter int          BETA_MILLI = 1000
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    step,
  input  logic signed [W_SUM-1:0] field,
  output logic                    m,
  output logic [31:0]             rnd
);
  timeunit 1ns; timeprecision 1ps;

  localparam int WL = pbit_pkg::W_LUTIN;
  localparam logic signed [W_SUM-1:0] MAXV = W_SUM'((1 << (WL-1)) - 1);
  localparam logic signed [W_SUM-1:0] MINV = -W_SUM'(1 << (WL-1));

  logic [WL-1:0] addr;
  logic [31:0]   thr;

  always_comb begin
    if (field > MAXV)      addr = MAXV[WL-1:0];
    else if (field < MINV) addr = MINV[WL-1:0];
    else                   addr = field[WL-1:0];
  end

  tanh_lut #(.W_IN(WL), .W_OUT(32), .BETA_MILLI(BETA_MILLI)) u_lut (.addr(addr), .thr(thr));

  lfsr32 #(.WIDTH(32), .TAPS(TAPS), .SEED(SEED)) u_rng (
    .clk(clk), .rst_n(rst_n), .step(step), .rnd(rnd));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    m <= 1'b0;
    else if (step) m <= $signed(rnd) > $signed(thr);
  end
endmodule

// clock_router -- chooses the p-bit clock source and fans the clocks out.
//
// The same p-bit network runs either from the five digital clocks (the
// all-digital LFSR p-computer) or from the five sMTJ p-bits (the
// heterogeneous CMOS + sMTJ p-computer). `src_smtj` selects the source; each
// p-bit i then takes clock pbit_pkg::clk_of(TOPO, i), and all strobes are
// gated by `run`. Combinational. Making the source a run-time choice is this
// design's; the clock-to-p-bit map is explained in pbit_pkg.
module clock_router #(
  parameter int              N       = 32,
  parameter int              NUM_CLK = 5,
  parameter pbit_pkg::topo_e TOPO    = pbit_pkg::TOPO_CHIMERA
) (
  input  logic               run,
  input  logic               src_smtj,
  input  logic [NUM_CLK-1:0] smtj_tick,
  input  logic [NUM_CLK-1:0] dig_tick,
  output logic [N-1:0]       step
);
  timeunit 1ns; timeprecision 1ps;

  logic [NUM_CLK-1:0] sel;

  always_comb begin
    sel = src_smtj ? smtj_tick : dig_tick;
    for (int i = 0; i < N; i++)
      step[i] = run & sel[pbit_pkg::clk_of(TOPO, i) % NUM_CLK];
  end
endmodule

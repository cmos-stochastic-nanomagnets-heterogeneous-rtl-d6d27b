// pbit_network -- N digital p-bits coupled through their synapses in a fixed
// hardware topology.
//
// Every p-bit i has its own pbit_mac, which sums the weights J_ij of the
// neighbours j (pbit_pkg::adjacent(TOPO, i, j)) that are in state 1 plus the
// bias h_i, and its own pbit (tanh table, LFSR with taps lfsr_taps(i) and seed
// lfsr_seed(i, SEED_BASE), comparator). Together they implement
//   I_i = sum_j J_ij m_j + h_i,    m_i = sgn(rand + tanh(BETA * I_i))
// in the binary form m in {0,1}. The host converts a bipolar (+-1) model to
// this form: J' = 2J, h'_i = h_i - sum_j J_ij.
//
// Timing: p-bit i updates one cycle after step[i]; the synapses are
// combinational, so a p-bit always sees the latest states of its neighbours.
// p-bits whose strobes coincide update in parallel from the same old state,
// which is exact Gibbs sampling only when they are not neighbours (guaranteed
// by the clock map for the Chimera graph). Weights may be rewritten while the
// network runs; the state is kept (persistent chains across weight updates).
module pbit_network #(
  parameter int              N         = 32,
  parameter pbit_pkg::topo_e TOPO      = pbit_pkg::TOPO_CHIMERA,
  parameter int              BETA_MILLI = 1000,
  parameter logic [31:0]     SEED_BASE = 32'h0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N-1:0]       step,
  input  pbit_pkg::weight_t  J [N][N],
  input  pbit_pkg::weight_t  h [N],
  output logic [N-1:0]       m
);
  timeunit 1ns; timeprecision 1ps;

  localparam int W_SUM = pbit_pkg::W_WEIGHT + $clog2(N + 1);

  for (genvar i = 0; i < N; i++) begin : g_pbit
    logic [N-1:0] mask;
    logic signed [W_SUM-1:0] field;

    always_comb
      for (int j = 0; j < N; j++) mask[j] = pbit_pkg::adjacent(TOPO, i, j);

    pbit_mac #(.N(N), .W_SUM(W_SUM)) u_mac (
      .m(m), .mask(mask), .j_row(J[i]), .h(h[i]), .field(field));

    pbit #(
      .W_SUM(W_SUM),
      .TAPS (pbit_pkg::lfsr_taps(i)),
      .SEED (pbit_pkg::lfsr_seed(i, SEED_BASE)),
      .BETA_MILLI(BETA_MILLI)
    ) u_pbit (
      .clk(clk), .rst_n(rst_n), .step(step[i]), .field(field),
      .m(m[i]), .rnd());   // random word is internal to the p-bit
  end
endmodule

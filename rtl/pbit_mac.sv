// pbit_mac -- synapse (multiply-accumulate unit) of one p-bit.
//
// Computes the local field I_i = h_i + sum_j m_j * J_ij. Because the p-bit
// states are binary (m_j in {0,1}) every product is a selection: weight J_ij
// enters the sum when m_j = 1 and `mask[j]` says that j is a neighbour of i
// in the hardware topology. Weights and bias are s[6][3]; the result keeps
// the same three fraction bits and is W_SUM bits wide, enough for N + 1 terms
// without overflow (the saturation to the table range happens in the p-bit).
//
// Purely combinational, like the synapse of the FPGA design it follows,
// which is settled long before the next p-bit update. The mask is a constant
// per instance; weights on non-edges are never read.
module pbit_mac #(
  parameter int N     = 32,
  parameter int W_SUM = pbit_pkg::W_WEIGHT + $clog2(N + 1)
) (
  input  logic [N-1:0]                     m,
  input  logic [N-1:0]                     mask,
  input  pbit_pkg::weight_t                j_row [N],
  input  pbit_pkg::weight_t                h,
  output logic signed [W_SUM-1:0]          field
);
  timeunit 1ns; timeprecision 1ps;

  always_comb begin
    logic signed [W_SUM-1:0] acc;
    acc = W_SUM'(h);
    for (int j = 0; j < N; j++)
      if (m[j] && mask[j]) acc = acc + W_SUM'(j_row[j]);
    field = acc;
  end
endmodule

// smtj_edge_sync -- samples the asynchronous sMTJ p-bit outputs.
//
// Each of the NUM_CLK inputs comes from an analog sMTJ p-bit through an FPGA
// input pin and switches at random times (milliseconds for the devices of the
// paper). It passes a SYNC_STAGES-flop synchroniser clocked by the system
// clock (75 MHz in the paper's FPGA); a rising edge of the synchronised level
// yields a one-cycle strobe `rise`, which the p-bits use as their clock
// enable. Latency from a pin edge to `rise` is SYNC_STAGES to SYNC_STAGES+1
// cycles. Sampling with the system clock follows the paper; the synchroniser
// depth and the choice of the rising edge as the "clock edge" are this
// design's. Reset clears all stages, so a line that is high at reset gives
// one strobe after reset.
module smtj_edge_sync #(
  parameter int NUM_CLK     = 5,
  parameter int SYNC_STAGES = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NUM_CLK-1:0] async_in,
  output logic [NUM_CLK-1:0] rise,
  output logic [NUM_CLK-1:0] level
);
  timeunit 1ns; timeprecision 1ps;

  logic [NUM_CLK-1:0] sync_q [SYNC_STAGES];
  logic [NUM_CLK-1:0] prev_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SYNC_STAGES; s++) sync_q[s] <= '0;
      prev_q <= '0;
    end else begin
      sync_q[0] <= async_in;
      for (int s = 1; s < SYNC_STAGES; s++) sync_q[s] <= sync_q[s-1];
      prev_q <= sync_q[SYNC_STAGES-1];
    end
  end

  always_comb begin
    level = sync_q[SYNC_STAGES-1];
    rise  = level & ~prev_q;
  end
endmodule

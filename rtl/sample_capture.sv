// sample_capture -- sampler and sample memory of the p-computer.
//
// A free-running divider produces a sampling tick every `div` system cycles
// (2 kHz for inference and learning, about 10 kHz for bit-stream capture in
// the paper). A pulse on `start` arms a capture of `count` samples: from the
// next tick on, every tick writes the current N-bit network state into the
// next word of a DEPTH x 32 memory (written as an array, one write and one
// read port, i.e. a block RAM), starting at word 0. `busy` is high while
// armed, `done` goes high when `count` words are stored (or the memory is
// full) and stays high until the next start; `n_stored` counts the words.
// The host then reads the memory through `rd_addr`/`rd_data`, one-cycle read
// latency. The sampler runs asynchronously to the p-bit clocks, so the same
// sampler serves every clock source.
//
// Depth and the start/done protocol are this design's choice. N <= 32.
module sample_capture #(
  parameter int N      = 32,
  parameter int DEPTH  = 16384,
  parameter int W_DIV  = 24,
  parameter int W_ADDR = $clog2(DEPTH),
  parameter int W_CNT  = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [W_CNT-1:0]  count,
  input  logic [W_DIV-1:0]  div,
  input  logic [N-1:0]      state,
  output logic              busy,
  output logic              done,
  output logic [W_CNT-1:0]  n_stored,
  output logic              tick,
  input  logic [W_ADDR-1:0] rd_addr,
  output logic [31:0]       rd_data
);
  timeunit 1ns; timeprecision 1ps;

  logic [31:0]      mem [DEPTH];
  logic [W_DIV-1:0] cnt;
  logic [W_CNT-1:0] target;
  logic             we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt <= '0;
    else if (cnt >= div - 1'b1 || div == '0) cnt <= '0;
    else cnt <= cnt + 1'b1;
  end
  always_comb tick = (cnt == '0);

  always_comb we = busy && tick;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      n_stored <= '0;
      target   <= '0;
    end else if (start) begin
      busy     <= (count != '0);
      done     <= (count == '0);
      n_stored <= '0;
      target   <= (count > W_CNT'(DEPTH)) ? W_CNT'(DEPTH) : count;
    end else if (we) begin
      n_stored <= n_stored + 1'b1;
      if (n_stored + 1'b1 == target) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (we) mem[n_stored[W_ADDR-1:0]] <= 32'(state);
    rd_data <= mem[rd_addr];
  end
endmodule

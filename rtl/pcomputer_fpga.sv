// pcomputer_fpga -- the digital probabilistic computer.
//
// Everything runs on one system clock `clk` (75 MHz in the paper's FPGA).
// The host programs weights, biases and control through the AXI4 port
// (axi4_slave -> pcomp_regs). The p-bits of pbit_network are stepped by
// clock_router, which takes either the five phase-shifted strobes of
// digital_clkgen (the all-digital LFSR p-computer) or the rising edges of
// the five sMTJ p-bit signals on `smtj_in`, synchronised by smtj_edge_sync
// (the heterogeneous CMOS + sMTJ p-computer). sample_capture records the
// network state at a programmable rate into a sample memory that the host
// reads back in AXI bursts. See pcomp_regs for the register map.
//
// The host runs learning: for each epoch it loads J and h (clamping visible
// p-bits with large biases in the positive phase), captures samples, and
// computes correlations itself. The network state persists across weight
// loads.
module pcomputer_fpga #(
  parameter int              N         = 32,
  parameter pbit_pkg::topo_e TOPO      = pbit_pkg::TOPO_CHIMERA,
  parameter int              BETA_MILLI = 1000,
  parameter int              DEPTH     = 16384,
  parameter logic [31:0]     SEED_BASE = 32'h0,
  parameter int              ID_W      = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [4:0]      smtj_in,
  input  logic [ID_W-1:0] s_axi_awid,
  input  logic [19:0]     s_axi_awaddr,
  input  logic [7:0]      s_axi_awlen,
  input  logic [2:0]      s_axi_awsize,
  input  logic [1:0]      s_axi_awburst,
  input  logic            s_axi_awvalid,
  output logic            s_axi_awready,
  input  logic [31:0]     s_axi_wdata,
  input  logic [3:0]      s_axi_wstrb,
  input  logic            s_axi_wlast,
  input  logic            s_axi_wvalid,
  output logic            s_axi_wready,
  output logic [ID_W-1:0] s_axi_bid,
  output logic [1:0]      s_axi_bresp,
  output logic            s_axi_bvalid,
  input  logic            s_axi_bready,
  input  logic [ID_W-1:0] s_axi_arid,
  input  logic [19:0]     s_axi_araddr,
  input  logic [7:0]      s_axi_arlen,
  input  logic [2:0]      s_axi_arsize,
  input  logic [1:0]      s_axi_arburst,
  input  logic            s_axi_arvalid,
  output logic            s_axi_arready,
  output logic [ID_W-1:0] s_axi_rid,
  output logic [31:0]     s_axi_rdata,
  output logic [1:0]      s_axi_rresp,
  output logic            s_axi_rlast,
  output logic            s_axi_rvalid,
  input  logic            s_axi_rready,
  output logic [N-1:0]    m,
  output logic [N-1:0]    step
);
  timeunit 1ns; timeprecision 1ps;

  localparam int NUM_CLK = pbit_pkg::NUM_CLK;
  localparam int W_DIV   = 24;
  localparam int W_SADDR = $clog2(DEPTH);
  localparam int W_CNT   = $clog2(DEPTH + 1);

  logic              reg_we, reg_re;
  logic [19:0]       reg_waddr, reg_raddr;
  logic [31:0]       reg_wdata, reg_rdata;
  logic [3:0]        reg_wstrb;
  logic              run, src_smtj, cap_start, cap_busy, cap_done;
  logic [W_DIV-1:0]  clk_div, smp_div;
  logic [W_CNT-1:0]  smp_count, cap_stored;
  logic [W_SADDR-1:0] smp_raddr;
  logic [31:0]       smp_rdata;
  logic [NUM_CLK-1:0] smtj_rise, dig_tick;
  pbit_pkg::weight_t J [N][N];
  pbit_pkg::weight_t h [N];

  axi4_slave #(.ADDR_W(20), .ID_W(ID_W)) u_axi (
    .clk, .rst_n,
    .s_axi_awid, .s_axi_awaddr, .s_axi_awlen, .s_axi_awsize, .s_axi_awburst,
    .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wlast, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bid, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_arid, .s_axi_araddr, .s_axi_arlen, .s_axi_arsize, .s_axi_arburst,
    .s_axi_arvalid, .s_axi_arready,
    .s_axi_rid, .s_axi_rdata, .s_axi_rresp, .s_axi_rlast, .s_axi_rvalid,
    .s_axi_rready,
    .reg_we, .reg_waddr, .reg_wdata, .reg_wstrb, .reg_re, .reg_raddr, .reg_rdata);

  pcomp_regs #(.N(N), .TOPO(TOPO), .ADDR_W(20), .W_DIV(W_DIV), .W_CNT(W_CNT),
               .W_SADDR(W_SADDR)) u_regs (
    .clk, .rst_n,
    .reg_we, .reg_waddr, .reg_wdata, .reg_wstrb, .reg_re, .reg_raddr, .reg_rdata,
    .run, .src_smtj, .cap_start, .clk_div, .smp_div, .smp_count, .J, .h,
    .cap_busy, .cap_done, .cap_stored, .state(m),
    .smp_raddr, .smp_rdata);

  smtj_edge_sync #(.NUM_CLK(NUM_CLK), .SYNC_STAGES(2)) u_sync (
    .clk, .rst_n, .async_in(smtj_in), .rise(smtj_rise), .level());   // level: only edges are used here

  digital_clkgen #(.NUM_CLK(NUM_CLK), .W_DIV(W_DIV)) u_clkgen (
    .clk, .rst_n, .div(clk_div), .tick(dig_tick));

  clock_router #(.N(N), .NUM_CLK(NUM_CLK), .TOPO(TOPO)) u_router (
    .run, .src_smtj, .smtj_tick(smtj_rise), .dig_tick, .step);

  pbit_network #(.N(N), .TOPO(TOPO), .BETA_MILLI(BETA_MILLI), .SEED_BASE(SEED_BASE)) u_net (
    .clk, .rst_n, .step, .J, .h, .m);

  sample_capture #(.N(N), .DEPTH(DEPTH), .W_DIV(W_DIV)) u_smp (
    .clk, .rst_n, .start(cap_start), .count(smp_count), .div(smp_div),
    .state(m), .busy(cap_busy), .done(cap_done), .n_stored(cap_stored),
    .tick(), .rd_addr(smp_raddr), .rd_data(smp_rdata));
endmodule

// pcomputer_top -- the heterogeneous CMOS + sMTJ probabilistic computer.
//
// Five analog sMTJ p-bits (behavioural models, smtj_pbit), biased at their
// 50/50 point, produce truly random, asynchronous telegraph signals that
// clock the LFSR p-bits of the digital p-computer (pcomputer_fpga). Their
// mean relaxation times default to the five measured devices, 2.4, 9.6,
// 14.4, 8.7 and 4.2 ms. The sMTJ outputs are also brought out on
// `smtj_out`. The host reaches the design through the AXI4 slave port; see
// pcomp_regs for the register map. Not synthesizable as a whole because of
// the analog models; pcomputer_fpga is the synthesizable part.
module pcomputer_top #(
  parameter int              N         = 32,
  parameter pbit_pkg::topo_e TOPO      = pbit_pkg::TOPO_CHIMERA,
  parameter int              BETA_MILLI = 1000,
  parameter int              DEPTH     = 16384,
  parameter int              SMTJ_VIN_MV = 1550,
  parameter int              TAU0_NS   = 2400000,
  parameter int              TAU1_NS   = 9600000,
  parameter int              TAU2_NS   = 14400000,
  parameter int              TAU3_NS   = 8700000,
  parameter int              TAU4_NS   = 4200000
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [3:0]   s_axi_awid,
  input  logic [19:0]  s_axi_awaddr,
  input  logic [7:0]   s_axi_awlen,
  input  logic [2:0]   s_axi_awsize,
  input  logic [1:0]   s_axi_awburst,
  input  logic         s_axi_awvalid,
  output logic         s_axi_awready,
  input  logic [31:0]  s_axi_wdata,
  input  logic [3:0]   s_axi_wstrb,
  input  logic         s_axi_wlast,
  input  logic         s_axi_wvalid,
  output logic         s_axi_wready,
  output logic [3:0]   s_axi_bid,
  output logic [1:0]   s_axi_bresp,
  output logic         s_axi_bvalid,
  input  logic         s_axi_bready,
  input  logic [3:0]   s_axi_arid,
  input  logic [19:0]  s_axi_araddr,
  input  logic [7:0]   s_axi_arlen,
  input  logic [2:0]   s_axi_arsize,
  input  logic [1:0]   s_axi_arburst,
  input  logic         s_axi_arvalid,
  output logic         s_axi_arready,
  output logic [3:0]   s_axi_rid,
  output logic [31:0]  s_axi_rdata,
  output logic [1:0]   s_axi_rresp,
  output logic         s_axi_rlast,
  output logic         s_axi_rvalid,
  input  logic         s_axi_rready,
  output logic [4:0]   smtj_out,
  output logic [N-1:0] m,
  output logic [N-1:0] step
);
  timeunit 1ns; timeprecision 1ps;

  int vin_mv;
  assign vin_mv = SMTJ_VIN_MV;

  smtj_pbit #(.TAU_NS(TAU0_NS), .SEED(11)) u_smtj0 (.v_in_mv(vin_mv), .v_out(smtj_out[0]));
  smtj_pbit #(.TAU_NS(TAU1_NS), .SEED(22)) u_smtj1 (.v_in_mv(vin_mv), .v_out(smtj_out[1]));
  smtj_pbit #(.TAU_NS(TAU2_NS), .SEED(33)) u_smtj2 (.v_in_mv(vin_mv), .v_out(smtj_out[2]));
  smtj_pbit #(.TAU_NS(TAU3_NS), .SEED(44)) u_smtj3 (.v_in_mv(vin_mv), .v_out(smtj_out[3]));
  smtj_pbit #(.TAU_NS(TAU4_NS), .SEED(55)) u_smtj4 (.v_in_mv(vin_mv), .v_out(smtj_out[4]));

  pcomputer_fpga #(.N(N), .TOPO(TOPO), .BETA_MILLI(BETA_MILLI), .DEPTH(DEPTH), .ID_W(4)) u_fpga (
    .clk, .rst_n, .smtj_in(smtj_out),
    .s_axi_awid, .s_axi_awaddr, .s_axi_awlen, .s_axi_awsize, .s_axi_awburst,
    .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wlast, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bid, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_arid, .s_axi_araddr, .s_axi_arlen, .s_axi_arsize, .s_axi_arburst,
    .s_axi_arvalid, .s_axi_arready,
    .s_axi_rid, .s_axi_rdata, .s_axi_rresp, .s_axi_rlast, .s_axi_rvalid,
    .s_axi_rready, .m, .step);
endmodule

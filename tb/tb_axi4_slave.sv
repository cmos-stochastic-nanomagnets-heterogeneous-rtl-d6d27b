// tb_axi4_slave -- the AXI4 slave in front of a register-bus model.
//
// The testbench holds a 1024-word memory behind the register bus (write in
// one cycle, read data one cycle after reg_re, as pcomp_regs does) and a
// shadow copy. Random INCR bursts of 1..64 beats are written with random
// byte strobes and random WVALID/RREADY stalls, then read back with bursts
// of other lengths. Checked: data, BID/RID echo, OKAY responses, RLAST on
// the last beat only, the number of register-bus accesses per burst, and
// that addresses step by 4.
module tb_axi4_slave;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0;
  logic [3:0]  awid, bid, arid, rid;
  logic [19:0] awaddr, araddr;
  logic [7:0]  awlen, arlen;
  logic [2:0]  awsize, arsize;
  logic [1:0]  awburst, arburst, bresp, rresp;
  logic        awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic        arvalid, arready, rlast, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic        reg_we, reg_re;
  logic [19:0] reg_waddr, reg_raddr;
  logic [31:0] reg_wdata, reg_rdata;
  logic [3:0]  reg_wstrb;
  int checks = 0, failures = 0;
  int n_we = 0, n_re = 0;
  logic [31:0] mem [1024];
  logic [31:0] shadow [1024];

  axi4_slave #(.ADDR_W(20), .ID_W(4)) dut (
    .clk, .rst_n,
    .s_axi_awid(awid), .s_axi_awaddr(awaddr), .s_axi_awlen(awlen), .s_axi_awsize(awsize),
    .s_axi_awburst(awburst), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wlast(wlast), .s_axi_wvalid(wvalid),
    .s_axi_wready(wready), .s_axi_bid(bid), .s_axi_bresp(bresp), .s_axi_bvalid(bvalid),
    .s_axi_bready(bready), .s_axi_arid(arid), .s_axi_araddr(araddr), .s_axi_arlen(arlen),
    .s_axi_arsize(arsize), .s_axi_arburst(arburst), .s_axi_arvalid(arvalid),
    .s_axi_arready(arready), .s_axi_rid(rid), .s_axi_rdata(rdata), .s_axi_rresp(rresp),
    .s_axi_rlast(rlast), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .reg_we, .reg_waddr, .reg_wdata, .reg_wstrb, .reg_re, .reg_raddr, .reg_rdata);

  `include "axi_master_tasks.svh"

  always #5 clk = ~clk;

  // register-bus model
  always_ff @(posedge clk) begin
    if (reg_we) begin
      for (int b = 0; b < 4; b++)
        if (reg_wstrb[b]) mem[reg_waddr[11:2]][8*b +: 8] <= reg_wdata[8*b +: 8];
      n_we <= n_we + 1;
    end
    if (reg_re) begin
      reg_rdata <= mem[reg_raddr[11:2]];
      n_re <= n_re + 1;
    end
  end

  initial begin : watchdog
    #20000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d [];
    logic [31:0] q [];
    int base, len, we0, re0;
    logic [3:0] st;
    axi_idle();
    for (int k = 0; k < 1024; k++) begin mem[k] = 0; shadow[k] = 0; end
    #33 rst_n = 1;
    repeat (3) @(posedge clk);
    for (int it = 0; it < 60; it++) begin
      axi_stall = (it % 3) * 30;
      len  = 1 + $urandom % 64;
      base = $urandom % (1024 - len);
      st   = (it < 10) ? 4'hF : 4'($urandom);
      d = new [len];
      for (int b = 0; b < len; b++) d[b] = $urandom;
      we0 = n_we;
      axi_write_burst(20'(base * 4), d, st);
      for (int b = 0; b < len; b++)
        for (int y = 0; y < 4; y++) if (st[y]) shadow[base + b][8*y +: 8] = d[b][8*y +: 8];
      checks++;
      if (n_we - we0 != len) begin failures++; $display("FAIL: %0d register writes for %0d beats", n_we - we0, len); end
      // read back a window that overlaps the burst
      len  = 1 + $urandom % 80;
      base = $urandom % (1024 - len);
      re0 = n_re;
      axi_read_burst(20'(base * 4), len, q);
      checks++;
      if (n_re - re0 != len) begin failures++; $display("FAIL: %0d register reads for %0d beats", n_re - re0, len); end
      for (int b = 0; b < len; b++) begin
        checks++;
        if (q[b] !== shadow[base + b]) begin
          failures++; $display("FAIL: word %0d read %h expected %h", base + b, q[b], shadow[base + b]);
        end
      end
    end
    // a 256-beat burst, the longest AXI4 allows
    axi_stall = 10;
    d = new [256];
    for (int b = 0; b < 256; b++) d[b] = $urandom;
    axi_write_burst(20'h400, d);
    axi_read_burst(20'h400, 256, q);
    for (int b = 0; b < 256; b++) begin
      checks++;
      if (q[b] !== d[b]) begin failures++; $display("FAIL: long burst beat %0d", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

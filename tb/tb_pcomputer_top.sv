// tb_pcomputer_top -- full-size test of the heterogeneous p-computer at its
// default build: 32 p-bits on the Chimera graph, five sMTJ models with the
// measured relaxation times (2.4 to 14.4 ms), 75 MHz system clock, 2 kHz
// sampling, driven through the AXI4 port like the host would.
//
// 1 The ID register reports 32 p-bits, Chimera.
// 2 Random symmetric weights on the graph edges and random biases are
//   written with one AXI burst per row (non-edges are written as well and
//   must be ignored: the local field of every p-bit is checked against a
//   sum over its graph neighbours at every step).
// 3 sMTJ clocks for 150 ms (several relaxation times of the slowest device): every step of a p-bit must coincide with a
//   synchronised rising edge of the sMTJ assigned to its colour, and the
//   number of steps equals the number of rises of that sMTJ. During this
//   time 20 samples are captured at 2 kHz, read back in one burst and
//   compared with a monitor of the state at each capture tick.
// 4 Digital clocks at the default 2 kHz for 5 ms: each p-bit steps 10 times.
// Each mechanism is counted and must have happened at least once.
module tb_pcomputer_top;
  timeunit 1ns; timeprecision 1ps;
  import pbit_pkg::*;
  localparam int N = 32;
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
  logic [4:0]  smtj_out;
  logic [N-1:0] m, step;
  int checks = 0, failures = 0;

  pcomputer_top dut (
    .clk, .rst_n,
    .s_axi_awid(awid), .s_axi_awaddr(awaddr), .s_axi_awlen(awlen), .s_axi_awsize(awsize),
    .s_axi_awburst(awburst), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wlast(wlast), .s_axi_wvalid(wvalid),
    .s_axi_wready(wready), .s_axi_bid(bid), .s_axi_bresp(bresp), .s_axi_bvalid(bvalid),
    .s_axi_bready(bready), .s_axi_arid(arid), .s_axi_araddr(araddr), .s_axi_arlen(arlen),
    .s_axi_arsize(arsize), .s_axi_arburst(arburst), .s_axi_arvalid(arvalid),
    .s_axi_arready(arready), .s_axi_rid(rid), .s_axi_rdata(rdata), .s_axi_rresp(rresp),
    .s_axi_rlast(rlast), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .smtj_out, .m, .step);

  `include "axi_master_tasks.svh"

  always #6.667 clk = ~clk;      // 75 MHz

  initial begin : watchdog
    #250000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- monitors
  int n_wr_burst = 0, n_rd_burst = 0, n_dig_step = 0, n_smtj_step = 0, n_smtj_rise = 0;
  int n_capture = 0, n_field = 0;
  int steps_of [N];
  int rises_of [5];
  bit count_en = 0;
  weight_t Jq [N][N];
  weight_t hq [N];
  logic [31:0] mon [$];

  always @(negedge clk) if (dut.u_fpga.u_smp.we) mon.push_back(32'(m));

  always @(negedge clk) if (count_en) begin
    for (int k = 0; k < 5; k++) if (dut.u_fpga.smtj_rise[k]) begin rises_of[k]++; n_smtj_rise++; end
    for (int i = 0; i < N; i++) if (step[i]) begin
      steps_of[i]++;
      if (dut.u_fpga.src_smtj) begin
        n_smtj_step++;
        checks++;
        if (!dut.u_fpga.smtj_rise[clk_of(TOPO_CHIMERA, i)]) begin
          failures++; $display("FAIL: p-bit %0d stepped without a rise of sMTJ %0d", i, clk_of(TOPO_CHIMERA, i));
        end
      end else n_dig_step++;
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_field
    always @(negedge clk) if (step[i]) begin
      int f;
      f = hq[i];
      for (int j = 0; j < N; j++) if (adjacent(TOPO_CHIMERA, i, j) && m[j]) f += Jq[i][j];
      checks++; n_field++;
      if (dut.u_fpga.u_net.g_pbit[i].field != f) begin
        failures++; $display("FAIL: field of p-bit %0d", i);
      end
    end
  end

  initial begin
    logic [31:0] q, st;
    logic [31:0] d [];
    logic [31:0] smp [];
    axi_idle();
    for (int i = 0; i < N; i++) begin
      hq[i] = weight_t'($urandom_range(0, 16)) - weight_t'(8);
      for (int j = 0; j < N; j++) Jq[i][j] = 0;
    end
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++) if (adjacent(TOPO_CHIMERA, i, j)) begin
        Jq[i][j] = weight_t'($urandom_range(0, 16)) - weight_t'(8);
        Jq[j][i] = Jq[i][j];
      end
    #40 rst_n = 1;
    repeat (5) @(posedge clk);

    axi_read(20'h18, q);
    checks++;
    if (q !== 32'h20) begin failures++; $display("FAIL: ID %h", q); end

    d = new [N];
    for (int i = 0; i < N; i++) d[i] = 32'(hq[i]);
    axi_write_burst(20'h40000, d); n_wr_burst++;
    for (int i = 0; i < N; i++) begin
      // garbage on non-edges: the hardware must not store it
      for (int j = 0; j < N; j++) d[j] = adjacent(TOPO_CHIMERA, i, j) ? 32'(Jq[i][j]) : $urandom;
      axi_write_burst(20'h80000 + 20'(1024 * i), d); n_wr_burst++;
    end

    // ---- sMTJ clocks, 2 kHz capture of 20 samples
    axi_write(20'h10, 32'd20);
    axi_write(20'h0, 32'h3);
    @(negedge clk) count_en = 1;
    axi_write(20'h0, 32'h7);                 // start capture, keep run + sMTJ
    #150000000;
    @(negedge clk) count_en = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (steps_of[i] != rises_of[clk_of(TOPO_CHIMERA, i)]) begin
        failures++; $display("FAIL: p-bit %0d: %0d steps, %0d rises", i, steps_of[i], rises_of[clk_of(TOPO_CHIMERA, i)]);
      end
    end
    $display("sMTJ rises in 150 ms: %0d %0d %0d %0d %0d", rises_of[0], rises_of[1], rises_of[2], rises_of[3], rises_of[4]);
    axi_read(20'h4, st);
    checks++;
    if (st[1:0] != 2'b10 || st[31:16] != 16'd20) begin failures++; $display("FAIL: STATUS %h", st); end
    else n_capture++;
    axi_read_burst(20'hC0000, 20, smp); n_rd_burst++;
    for (int k = 0; k < 20; k++) begin
      checks++;
      if (k >= mon.size() || smp[k] !== mon[k]) begin failures++; $display("FAIL: sample %0d %h", k, smp[k]); end
    end
    checks++;
    if (mon.size() != 20) begin failures++; $display("FAIL: %0d capture writes", mon.size()); end

    // ---- digital clocks at the default 2 kHz
    axi_write(20'h0, 32'h1);
    for (int i = 0; i < N; i++) steps_of[i] = 0;
    repeat (100) @(posedge clk);
    @(negedge clk) count_en = 1;
    repeat (375000) @(posedge clk);
    @(negedge clk) count_en = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (steps_of[i] < 9 || steps_of[i] > 11) begin failures++; $display("FAIL: p-bit %0d %0d digital steps", i, steps_of[i]); end
    end

    $display("mechanisms: write bursts %0d, read bursts %0d, sMTJ rises %0d, sMTJ steps %0d, digital steps %0d, captures %0d, field checks %0d",
             n_wr_burst, n_rd_burst, n_smtj_rise, n_smtj_step, n_dig_step, n_capture, n_field);
    checks++; if (n_wr_burst == 0)  begin failures++; $display("FAIL: no write burst"); end
    checks++; if (n_rd_burst == 0)  begin failures++; $display("FAIL: no read burst"); end
    for (int k = 0; k < 5; k++) begin
      checks++; if (rises_of[k] == 0) begin failures++; $display("FAIL: sMTJ %0d never rose", k); end
    end
    checks++; if (n_smtj_step == 0) begin failures++; $display("FAIL: no sMTJ-clocked step"); end
    checks++; if (n_dig_step == 0)  begin failures++; $display("FAIL: no digital step"); end
    checks++; if (n_capture == 0)   begin failures++; $display("FAIL: no capture"); end
    checks++; if (n_field == 0)     begin failures++; $display("FAIL: no field check"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

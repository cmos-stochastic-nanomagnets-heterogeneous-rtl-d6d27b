// tb_pcomputer_fpga -- end-to-end test of the synthesizable p-computer,
// driven only through its AXI4 port and its five sMTJ clock pins.
//
// Build: 5 p-bits, all-to-all, so that the paper's full adder (p-bits
// A, B, Cin, S, Cout = p-bits 0..4) fits. The host side (this testbench)
// converts the +-1 full-adder weights to the hardware's 0/1 convention,
// J' = 2*beta*J and h' = beta*(h - sum_j J_ij) with beta = 2, quantises to
// s[6][3] and writes them with AXI bursts. Five behavioural sMTJ models with
// a 300 ns relaxation time (scaled down from milliseconds) drive the
// sMTJ clock pins.
// Phases:
//   1 digital clocks (CLK_DIV = 5): capture 3000 samples, read them back
//     in bursts, compare word for word with a monitor of the state at each
//     capture tick, KL divergence to the exact Boltzmann law < 0.05;
//     every p-bit steps once per CLK_DIV cycles.
//   2 sMTJ clocks: the same statistics; every p-bit steps once per rising
//     edge of its sMTJ (at most 10 % of very short pulses may be missed by
//     the synchroniser, as in hardware).
//   3 clamping A = B = 1, Cin = 0 with large biases: S = 0 and Cout = 1 in
//     nearly every sample (the fields saturate the tanh table).
//   4 weights reloaded while running (as during learning), then sampled.
// Each mechanism is counted; a mechanism that never happened is a failure.
module tb_pcomputer_fpga;
  timeunit 1ns; timeprecision 1ps;
  import pbit_pkg::*;
  localparam int N = 5;
  localparam real BETA = 2.0;
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
  logic [4:0]  smtj;
  logic [N-1:0] m, step;
  int checks = 0, failures = 0;

  pcomputer_fpga #(.N(N), .TOPO(TOPO_FULL), .DEPTH(16384)) dut (
    .clk, .rst_n, .smtj_in(smtj),
    .s_axi_awid(awid), .s_axi_awaddr(awaddr), .s_axi_awlen(awlen), .s_axi_awsize(awsize),
    .s_axi_awburst(awburst), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wlast(wlast), .s_axi_wvalid(wvalid),
    .s_axi_wready(wready), .s_axi_bid(bid), .s_axi_bresp(bresp), .s_axi_bvalid(bvalid),
    .s_axi_bready(bready), .s_axi_arid(arid), .s_axi_araddr(araddr), .s_axi_arlen(arlen),
    .s_axi_arsize(arsize), .s_axi_arburst(arburst), .s_axi_arvalid(arvalid),
    .s_axi_arready(arready), .s_axi_rid(rid), .s_axi_rdata(rdata), .s_axi_rresp(rresp),
    .s_axi_rlast(rlast), .s_axi_rvalid(rvalid), .s_axi_rready(rready), .m, .step);

  int vin = 1550;
  smtj_pbit #(.TAU_NS(300), .SEED(3))  u_s0 (.v_in_mv(vin), .v_out(smtj[0]));
  smtj_pbit #(.TAU_NS(300), .SEED(5))  u_s1 (.v_in_mv(vin), .v_out(smtj[1]));
  smtj_pbit #(.TAU_NS(300), .SEED(8))  u_s2 (.v_in_mv(vin), .v_out(smtj[2]));
  smtj_pbit #(.TAU_NS(300), .SEED(13)) u_s3 (.v_in_mv(vin), .v_out(smtj[3]));
  smtj_pbit #(.TAU_NS(300), .SEED(21)) u_s4 (.v_in_mv(vin), .v_out(smtj[4]));

  `include "axi_master_tasks.svh"

  always #5 clk = ~clk;

  initial begin : watchdog
    #200000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters
  int n_wr_burst = 0, n_rd_burst = 0, n_dig_step = 0, n_smtj_step = 0;
  int n_capture = 0, n_clamp = 0, n_reload_run = 0, n_sat = 0, n_smtj_edge = 0;

  // ---------------- monitors
  logic [31:0] mon [$];                   // state at every capture write
  always @(negedge clk) if (dut.u_smp.we) mon.push_back(32'(m));

  int steps_of [N];
  int edges_of [5];
  bit count_en = 0;
  logic [4:0] smtj_q = 0;
  always @(negedge clk) if (count_en) begin
    for (int i = 0; i < N; i++) if (step[i]) begin
      steps_of[i]++;
      if (dut.src_smtj) n_smtj_step++; else n_dig_step++;
    end
  end
  always @(smtj) begin
    for (int k = 0; k < 5; k++) if (count_en && smtj[k] && !smtj_q[k]) begin edges_of[k]++; n_smtj_edge++; end
    smtj_q = smtj;
  end
  // the table saturates when a clamped p-bit's field leaves the s[4][3] range
  for (genvar i = 0; i < N; i++) begin : g_sat
    always @(negedge clk)
      if (step[i] && (dut.u_net.g_pbit[i].field > 127 || dut.u_net.g_pbit[i].field < -128)) n_sat++;
  end

  // ---------------- host-side model of the full adder
  real Jb [N][N];
  real hb [N];
  weight_t Jq [N][N];
  weight_t hq [N];

  function automatic int q8(real v);
    return int'(v * 8.0);
  endfunction

  function automatic bit valid_fa(int x);
    bit a, b, c, s, co;
    a = x[0]; b = x[1]; c = x[2]; s = x[3]; co = x[4];
    return (s == (a ^ b ^ c)) && (co == ((a & b) | (a & c) | (b & c)));
  endfunction

  task automatic load_weights(real extra_h [N]);
    logic [31:0] d [];
    for (int i = 0; i < N; i++) begin
      real s;
      s = 0.0;
      for (int j = 0; j < N; j++) s += Jb[i][j];
      hq[i] = weight_t'(q8(BETA * (hb[i] + extra_h[i] - s)));
      for (int j = 0; j < N; j++) Jq[i][j] = weight_t'(q8(2.0 * BETA * Jb[i][j]));
    end
    d = new [N];
    for (int i = 0; i < N; i++) d[i] = 32'(hq[i]);
    axi_write_burst(20'h40000, d);
    n_wr_burst++;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) d[j] = 32'(Jq[i][j]);
      axi_write_burst(20'h80000 + 20'(1024 * i), d);
      n_wr_burst++;
    end
  endtask

  // capture `cnt` samples every `div` cycles, read them back, compare with
  // the monitor and return the histogram
  task automatic capture(int cnt, int div, output int hist [32]);
    logic [31:0] q, st;
    logic [31:0] buf_ [];
    int got;
    axi_write(20'hC, 32'(div));
    axi_write(20'h10, 32'(cnt));
    mon.delete();
    axi_read(20'h0, q);
    axi_write(20'h0, q | 32'h4);          // keep run/source, start capture
    do begin
      repeat (200) @(posedge clk);
      axi_read(20'h4, st);
    end while (st[0]);
    checks++;
    if (!st[1] || st[31:16] != 16'(cnt)) begin failures++; $display("FAIL: STATUS %h after capture", st); end
    n_capture++;
    for (int k = 0; k < 32; k++) hist[k] = 0;
    got = 0;
    while (got < cnt) begin
      int len;
      len = (cnt - got > 256) ? 256 : cnt - got;
      axi_read_burst(20'hC0000 + 20'(4 * got), len, buf_);
      n_rd_burst++;
      for (int b = 0; b < len; b++) begin
        checks++;
        if (got + b >= mon.size() || buf_[b] !== mon[got + b]) begin
          failures++; $display("FAIL: sample %0d read %h", got + b, buf_[b]);
        end
        hist[buf_[b][4:0]]++;
      end
      got += len;
    end
    checks++;
    if (mon.size() != cnt) begin failures++; $display("FAIL: %0d capture writes for %0d samples", mon.size(), cnt); end
  endtask

  function automatic real kl_to_boltzmann(int hist [32], int n);
    real lw [32];
    real z, kl, pm;
    z = 0.0;
    for (int x = 0; x < 32; x++) begin
      real e;
      e = 0.0;
      for (int a = 0; a < N; a++) if (x[a]) begin
        e += real'(hq[a]) / 8.0;
        for (int b = a + 1; b < N; b++) if (x[b]) e += real'(Jq[a][b]) / 8.0;
      end
      lw[x] = $exp(2.0 * e);
      z += lw[x];
    end
    kl = 0.0;
    for (int x = 0; x < 32; x++) begin
      pm = real'(hist[x]) / real'(n);
      if (pm > 0.0) kl += pm * $ln(pm * z / lw[x]);
    end
    return kl;
  endfunction

  function automatic real frac_valid(int hist [32], int n);
    int v;
    v = 0;
    for (int x = 0; x < 32; x++) if (valid_fa(x)) v += hist[x];
    return real'(v) / real'(n);
  endfunction

  initial begin
    real zero_h [N];
    real clamp_h [N];
    int hist [32];
    real kl, fv;
    logic [31:0] q;
    int cyc0;
    real Jfa [5][5] = '{'{0,-1,-1,1,2}, '{-1,0,-1,1,2}, '{-1,-1,0,1,2}, '{1,1,1,0,-2}, '{2,2,2,-2,0}};
    axi_idle();
    for (int i = 0; i < N; i++) begin
      hb[i] = 0.0; zero_h[i] = 0.0; clamp_h[i] = 0.0;
      steps_of[i] = 0;
      for (int j = 0; j < N; j++) Jb[i][j] = Jfa[i][j];
    end
    for (int k = 0; k < 5; k++) edges_of[k] = 0;
    clamp_h[0] = 4.0; clamp_h[1] = 4.0; clamp_h[2] = -4.0;
    #37 rst_n = 1;
    repeat (5) @(posedge clk);

    axi_read(20'h18, q);
    checks++;
    if (q !== 32'h105) begin failures++; $display("FAIL: ID %h", q); end

    load_weights(zero_h);

    // ---- phase 1: digital clocks
    axi_write(20'h8, 32'd5);
    axi_write(20'h0, 32'h1);                 // run, digital
    repeat (100) @(posedge clk);
    count_en = 1; cyc0 = 0;
    for (int i = 0; i < N; i++) steps_of[i] = 0;
    repeat (5000) @(posedge clk);
    count_en = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (steps_of[i] < 999 || steps_of[i] > 1001) begin failures++; $display("FAIL: p-bit %0d stepped %0d times in 5000 cycles", i, steps_of[i]); end
    end
    axi_stall = 20;
    capture(3000, 37, hist);
    axi_stall = 0;
    kl = kl_to_boltzmann(hist, 3000); fv = frac_valid(hist, 3000);
    $display("digital clocks: KL %f, valid full-adder states %f", kl, fv);
    checks++; if (kl > 0.05) begin failures++; $display("FAIL: KL digital %f", kl); end
    checks++; if (fv < 0.7) begin failures++; $display("FAIL: valid fraction %f", fv); end

    // live state register follows m
    axi_write(20'h0, 32'h0);                 // stop
    repeat (10) @(posedge clk);
    axi_read(20'h14, q);
    checks++;
    if (q !== 32'(m)) begin failures++; $display("FAIL: STATE %h m %h", q, m); end

    // ---- phase 2: sMTJ clocks
    axi_write(20'h0, 32'h3);                 // run, sMTJ
    for (int i = 0; i < N; i++) steps_of[i] = 0;
    for (int k = 0; k < 5; k++) edges_of[k] = 0;
    @(negedge clk) count_en = 1;
    #200000;
    @(negedge clk) count_en = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      // a pulse shorter than the two-flop synchroniser can be missed, so up
      // to 10 % of the rises may produce no step; none may produce two
      if (steps_of[i] < (edges_of[i % 5] * 9) / 10 || steps_of[i] > edges_of[i % 5] + 1 || edges_of[i % 5] < 100) begin
        failures++; $display("FAIL: p-bit %0d %0d steps for %0d sMTJ rises", i, steps_of[i], edges_of[i % 5]);
      end
    end
    capture(2000, 1000, hist);
    kl = kl_to_boltzmann(hist, 2000); fv = frac_valid(hist, 2000);
    $display("sMTJ clocks: KL %f, valid full-adder states %f", kl, fv);
    checks++; if (kl > 0.08) begin failures++; $display("FAIL: KL sMTJ %f", kl); end
    checks++; if (fv < 0.7) begin failures++; $display("FAIL: valid fraction sMTJ %f", fv); end

    // ---- phase 3: clamp A = B = 1, Cin = 0 (digital clocks)
    axi_write(20'h0, 32'h1);
    load_weights(clamp_h);
    n_reload_run++;                           // weights changed with run = 1
    repeat (200) @(posedge clk);
    capture(500, 23, hist);
    n_clamp++;
    $display("clamped A=1 B=1 Cin=0: %0d of 500 samples read S=0 Cout=1", hist[5'b10011]);
    checks++;
    if (hist[5'b10011] < 475) begin failures++; $display("FAIL: clamped adder gave %0d/500", hist[5'b10011]); end

    // ---- phase 4: reload the free weights while running, sample again
    load_weights(zero_h);
    n_reload_run++;
    repeat (200) @(posedge clk);
    capture(2000, 37, hist);
    kl = kl_to_boltzmann(hist, 2000);
    $display("after reload: KL %f", kl);
    checks++; if (kl > 0.06) begin failures++; $display("FAIL: KL after reload %f", kl); end

    // ---- every mechanism must have happened
    $display("mechanisms: write bursts %0d, read bursts %0d, digital steps %0d, sMTJ edges %0d, sMTJ steps %0d, captures %0d, clamps %0d, reloads while running %0d, saturated fields %0d",
             n_wr_burst, n_rd_burst, n_dig_step, n_smtj_edge, n_smtj_step, n_capture, n_clamp, n_reload_run, n_sat);
    checks++; if (n_wr_burst == 0)  begin failures++; $display("FAIL: no AXI write burst"); end
    checks++; if (n_rd_burst == 0)  begin failures++; $display("FAIL: no AXI read burst"); end
    checks++; if (n_dig_step == 0)  begin failures++; $display("FAIL: no digital-clock step"); end
    checks++; if (n_smtj_edge == 0) begin failures++; $display("FAIL: no sMTJ edge"); end
    checks++; if (n_smtj_step == 0) begin failures++; $display("FAIL: no sMTJ-clock step"); end
    checks++; if (n_capture == 0)   begin failures++; $display("FAIL: no capture"); end
    checks++; if (n_clamp == 0)     begin failures++; $display("FAIL: no clamped inference"); end
    checks++; if (n_reload_run == 0) begin failures++; $display("FAIL: no reload while running"); end
    checks++; if (n_sat == 0)       begin failures++; $display("FAIL: tanh table never saturated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

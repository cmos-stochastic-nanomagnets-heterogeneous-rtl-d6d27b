// tb_pbit_network -- sampling statistics and local fields of the p-bit
// network.
//
// Part 1: a 4-p-bit all-to-all network with the weights of the paper's
// update-order example (J14 = 2.5, J13 = 1, J12 = -1.5, J24 = 2, J34 = -2,
// J23 = 0.3, h2 = 0.3, in the +-1 convention) is converted to the 0/1
// convention of the hardware (J' = 2J, h'_i = h_i - sum_j J_ij), quantised
// to s[6][3], and run with one randomly chosen p-bit updated per cycle
// (random-scan Gibbs sampling). The histogram of the 16 states must match
// the Boltzmann distribution of the quantised weights, KL < 0.01.
// Part 2: a 32-p-bit Chimera network with random symmetric weights. On
// every update the local field inside each p-bit is compared with a
// reference sum over the graph neighbours only, and every p-bit must flip
// both ways.
module tb_pbit_network;
  timeunit 1ns; timeprecision 1ps;
  import pbit_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin : watchdog
    #50000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- part 1: four p-bits, all-to-all
  logic [3:0] step4 = 0;
  weight_t J4 [4][4];
  weight_t h4 [4];
  logic [3:0] m4;
  pbit_network #(.N(4), .TOPO(TOPO_FULL), .BETA_MILLI(1000), .SEED_BASE(32'h1234)) u_net4 (
    .clk, .rst_n, .step(step4), .J(J4), .h(h4), .m(m4));

  // ---------------- part 2: 32 p-bits, Chimera
  localparam int N = 32;
  logic [N-1:0] step32 = 0;
  weight_t J32 [N][N];
  weight_t h32 [N];
  logic [N-1:0] m32;
  int ups [N], downs [N];
  bit part2 = 0;
  pbit_network #(.N(N)) u_net32 (.clk, .rst_n, .step(step32), .J(J32), .h(h32), .m(m32));

  for (genvar i = 0; i < N; i++) begin : g_chk
    always @(negedge clk) if (part2 && step32[i]) begin
      int f;
      f = h32[i];
      for (int j = 0; j < N; j++) if (adjacent(TOPO_CHIMERA, i, j) && m32[j]) f += J32[i][j];
      checks++;
      if (u_net32.g_pbit[i].field != f) begin
        failures++; $display("FAIL: field of p-bit %0d is %0d, expected %0d", i, u_net32.g_pbit[i].field, f);
      end
    end
    always @(posedge clk) if (part2 && step32[i]) begin
      logic old;
      old = m32[i];
      #1;
      if (old == 0 && m32[i] == 1) ups[i]++;
      if (old == 1 && m32[i] == 0) downs[i]++;
    end
  end

  function automatic int q8(real v);
    return int'(v * 8.0);
  endfunction

  initial begin
    real Jb [4][4];
    real hb [4];
    real lw [16];
    real z, kl, pe, pm;
    int hist [16];
    int nsamp;
    for (int a = 0; a < 4; a++) begin hb[a] = 0.0; for (int b = 0; b < 4; b++) Jb[a][b] = 0.0; end
    Jb[0][3] = 2.5; Jb[0][2] = 1.0; Jb[0][1] = -1.5; Jb[3][1] = 2.0; Jb[3][2] = -2.0; Jb[2][1] = 0.3;
    hb[1] = 0.3;
    for (int a = 0; a < 4; a++) for (int b = 0; b < a; b++) Jb[a][b] = Jb[b][a];
    for (int a = 0; a < 4; a++) for (int b = a + 1; b < 4; b++) Jb[a][b] = Jb[b][a];
    for (int a = 0; a < 4; a++) begin
      real s;
      s = 0.0;
      for (int b = 0; b < 4; b++) begin J4[a][b] = weight_t'(q8(2.0 * Jb[a][b])); s += Jb[a][b]; end
      h4[a] = weight_t'(q8(hb[a] - s));
    end
    // exact distribution of the quantised network, beta = 1
    z = 0.0;
    for (int x = 0; x < 16; x++) begin
      real e;
      e = 0.0;
      for (int a = 0; a < 4; a++) if (x[a]) begin
        e += real'(h4[a]) / 8.0;
        for (int b = a + 1; b < 4; b++) if (x[b]) e += real'(J4[a][b]) / 8.0;
      end
      lw[x] = $exp(2.0 * e);
      z += lw[x];
      hist[x] = 0;
    end
    #23 rst_n = 1;
    repeat (2) @(posedge clk);
    nsamp = 0;
    for (int t = 0; t < 400000; t++) begin
      #1 step4 = 4'b1 << ($urandom % 4);
      @(posedge clk);
      if (t >= 1000 && t % 4 == 0) begin hist[m4]++; nsamp++; end
    end
    #1 step4 = 0;
    kl = 0.0;
    for (int x = 0; x < 16; x++) begin
      pe = lw[x] / z;
      pm = real'(hist[x]) / real'(nsamp);
      $display("state %04b  measured %f  Boltzmann %f", 4'(x), pm, pe);
      if (pm > 0.0) kl += pm * $ln(pm / pe);
    end
    $display("KL = %f", kl);
    checks++;
    if (kl > 0.01) begin failures++; $display("FAIL: KL %f", kl); end

    // part 2
    for (int a = 0; a < N; a++) begin
      h32[a] = weight_t'($urandom_range(0, 8)) - weight_t'(4);
      ups[a] = 0; downs[a] = 0;
      for (int b = 0; b < N; b++) J32[a][b] = weight_t'($urandom);   // non-edges must not matter
    end
    for (int a = 0; a < N; a++)
      for (int b = a + 1; b < N; b++) if (adjacent(TOPO_CHIMERA, a, b)) begin
        J32[a][b] = weight_t'($urandom_range(0, 8)) - weight_t'(4);
        J32[b][a] = J32[a][b];
      end
    part2 = 1;
    for (int t = 0; t < 20000; t++) begin
      #1 step32 = N'($urandom) & N'($urandom);   // any subset, also neighbours together
      @(posedge clk);
    end
    #1 step32 = 0;
    part2 = 0;
    for (int a = 0; a < N; a++) begin
      checks++;
      if (ups[a] == 0 || downs[a] == 0) begin failures++; $display("FAIL: p-bit %0d never flipped (%0d up %0d down)", a, ups[a], downs[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

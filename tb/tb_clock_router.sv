// tb_clock_router -- the 32-node Chimera router and the 5-node all-to-all
// router. Builds the Chimera edge list from the cell structure here, checks
// that two neighbours never share a clock, that all five clocks are used,
// that each p-bit follows exactly one clock of the selected source and that
// `run` gates everything.
module tb_clock_router;
  timeunit 1ns; timeprecision 1ps;
  logic run, src;
  logic [4:0] smtj_tick, dig_tick;
  logic [31:0] step;
  logic [4:0]  step5;
  int checks = 0, failures = 0;
  int clk_id [32];

  clock_router #(.N(32), .NUM_CLK(5), .TOPO(pbit_pkg::TOPO_CHIMERA)) dut (
    .run, .src_smtj(src), .smtj_tick, .dig_tick, .step);
  clock_router #(.N(5), .NUM_CLK(5), .TOPO(pbit_pkg::TOPO_FULL)) dut5 (
    .run, .src_smtj(src), .smtj_tick, .dig_tick, .step(step5));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int used [5];
    // discover each p-bit's clock by pulsing one clock at a time
    #1 run = 1;
    for (int s = 0; s < 2; s++) begin
      src = s[0];
      for (int i = 0; i < 32; i++) clk_id[i] = -1;
      for (int c = 0; c < 5; c++) begin
        smtj_tick = s ? 5'(1 << c) : 5'(0);
        dig_tick  = s ? 5'(0) : 5'(1 << c);
        #1;
        for (int i = 0; i < 32; i++) if (step[i]) begin
          check(clk_id[i] == -1, $sformatf("p-bit %0d on two clocks", i));
          clk_id[i] = c;
        end
        for (int i = 0; i < 5; i++) check(step5[i] == (i == c), $sformatf("full: p-bit %0d clock %0d", i, c));
        // the other source must not leak
        smtj_tick = s ? 5'(0) : 5'(1 << c);
        dig_tick  = s ? 5'(1 << c) : 5'(0);
        #1 check(step == '0 && step5 == '0, "unselected source leaks");
      end
      for (int i = 0; i < 32; i++) check(clk_id[i] >= 0, $sformatf("p-bit %0d has no clock", i));
    end
    foreach (used[c]) used[c] = 0;
    for (int i = 0; i < 32; i++) used[clk_id[i]]++;
    foreach (used[c]) check(used[c] > 0, $sformatf("clock %0d unused", c));
    // Chimera 2x2 cells of K4,4: edges built independently
    for (int a = 0; a < 32; a++)
      for (int b = a + 1; b < 32; b++) begin
        int ca, cb, sa, sb;
        bit e;
        ca = a / 8; cb = b / 8; sa = (a % 8) / 4; sb = (b % 8) / 4;
        e = (ca == cb) ? (sa != sb) :
            (sa == sb && (a % 4) == (b % 4) &&
             ((sa == 0 && ca % 2 == cb % 2 && (ca / 2 != cb / 2)) ||
              (sa == 1 && ca / 2 == cb / 2 && (ca % 2 != cb % 2))));
        check(e == pbit_pkg::adjacent(pbit_pkg::TOPO_CHIMERA, a, b), $sformatf("adjacency %0d-%0d", a, b));
        if (e) check(clk_id[a] != clk_id[b], $sformatf("neighbours %0d,%0d share clock %0d", a, b, clk_id[a]));
      end
    run = 0; smtj_tick = '1; dig_tick = '1;
    #1 check(step == '0 && step5 == '0, "run=0 gates all");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_digital_clkgen -- for several dividers, every strobe must have the
// programmed period and strobe k must lag strobe 0 by k*div/5 cycles;
// a divider below 5 is raised to 5.
module tb_digital_clkgen;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0;
  logic [23:0] div = 24'd10;
  logic [4:0] tick;
  int checks = 0, failures = 0;
  longint cyc = 0;
  longint last [5];

  digital_clkgen #(.NUM_CLK(5), .W_DIV(24)) dut (.clk, .rst_n, .div, .tick);

  always #5 clk = ~clk;

  initial begin : watchdog
    #5000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(int d);
    int ed = (d < 5) ? 5 : d;
    longint t0 = -1;
    longint first [5];
    int seen [5];
    div = 24'(d);
    // let the new divider take effect
    repeat (3 * 1000 + 5) @(posedge clk);
    for (int k = 0; k < 5; k++) begin seen[k] = 0; last[k] = -1; end
    cyc = 0;
    repeat (10 * ed) begin
      @(posedge clk); #1;
      cyc++;
      for (int k = 0; k < 5; k++) if (tick[k]) begin
        if (last[k] >= 0) begin
          checks++;
          if (cyc - last[k] != ed) begin failures++; $display("FAIL: div %0d tick %0d period %0d", d, k, cyc - last[k]); end
        end
        if (seen[k] == 0) first[k] = cyc;
        seen[k]++; last[k] = cyc;
      end
    end
    for (int k = 1; k < 5; k++) begin
      longint lag = first[k] - first[0];
      if (lag < 0) lag += ed;
      checks++;
      if (lag != (ed * k) / 5) begin failures++; $display("FAIL: div %0d tick %0d lag %0d exp %0d", d, k, lag, (ed*k)/5); end
    end
  endtask

  initial begin
    #22 rst_n = 1;
    measure(10);
    measure(5);
    measure(37);
    measure(3);
    measure(1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_smtj_edge_sync -- random asynchronous edges on five lines (held for at
// least three cycles); every rising edge must give exactly one strobe, two or
// three system cycles after the edge, and no strobe on falling edges.
module tb_smtj_edge_sync;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0;
  logic [4:0] async_in = '0, rise, level;
  int checks = 0, failures = 0;
  int n_edges [5], n_rise [5];
  longint last_edge_cyc [5];
  longint cyc = 0;

  smtj_edge_sync #(.NUM_CLK(5), .SYNC_STAGES(2)) dut (.clk, .rst_n, .async_in, .rise, .level);

  always #6.667 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    #2000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar k = 0; k < 5; k++) begin : g_drv
    initial begin
      n_edges[k] = 0;
      @(posedge rst_n);
      repeat (200) begin
        #($urandom_range(40, 400) * 1.0 + 0.37 * k);
        async_in[k] = ~async_in[k];
        if (async_in[k]) begin n_edges[k]++; last_edge_cyc[k] = cyc; end
      end
    end
    initial n_rise[k] = 0;
    always @(posedge clk) if (rst_n && rise[k]) begin
      longint lat;
      lat = cyc - last_edge_cyc[k];
      n_rise[k]++;
      checks++;
      if (lat < 2 || lat > 3 || !level[k]) begin
        failures++; $display("FAIL: line %0d strobe latency %0d", k, lat);
      end
    end
  end

  initial begin
    #20 rst_n = 1;
    #1000000;
    for (int k = 0; k < 5; k++) begin
      checks++;
      if (n_rise[k] != n_edges[k]) begin
        failures++; $display("FAIL: line %0d edges %0d strobes %0d", k, n_edges[k], n_rise[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

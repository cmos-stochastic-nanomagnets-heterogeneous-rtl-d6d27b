// tb_sample_capture -- small memory (16 words), sampling every 7 cycles.
// Captures 5 samples of a changing state and reads them back; checks the
// tick period, busy/done, the stored count, the stored values (state at
// each tick while armed), and that a request beyond the depth stops at the
// depth.
module tb_sample_capture;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, start = 0, busy, done, tick;
  logic [4:0]  count = '0, n_stored;
  logic [23:0] div = 24'd7;
  logic [7:0]  state = '0;
  logic [3:0]  rd_addr = '0;
  logic [31:0] rd_data;
  int checks = 0, failures = 0;
  logic [7:0] expect_q [$];

  sample_capture #(.N(8), .DEPTH(16), .W_DIV(24)) dut (
    .clk, .rst_n, .start, .count, .div, .state, .busy, .done, .n_stored, .tick,
    .rd_addr, .rd_data);

  always #5 clk = ~clk;
  always @(posedge clk) state <= state + 8'd3;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    #200000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: what should be stored
  always @(posedge clk) if (rst_n && busy && tick) expect_q.push_back(state);

  task automatic capture(int n, int expn);
    int last_tick = -1, cyc = 0;
    expect_q.delete();
    @(negedge clk); count = 5'(n); start = 1;
    @(negedge clk); start = 0;
    check(busy && !done, "busy after start");
    while (busy) begin
      @(negedge clk); cyc++;
      if (tick) begin
        if (last_tick >= 0) check(cyc - last_tick == 7, "tick period");
        last_tick = cyc;
      end
    end
    check(done, "done after capture");
    check(int'(n_stored) == expn, $sformatf("stored %0d exp %0d", n_stored, expn));
    check(expect_q.size() == expn, "reference count");
    for (int k = 0; k < expn; k++) begin
      @(negedge clk); rd_addr = 4'(k);
      @(negedge clk);
      check(rd_data == 32'(expect_q[k]), $sformatf("sample %0d: %h exp %h", k, rd_data, expect_q[k]));
    end
  endtask

  initial begin
    #22 rst_n = 1;
    capture(5, 5);
    capture(20, 16);
    capture(1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

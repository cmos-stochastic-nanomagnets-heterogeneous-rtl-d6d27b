// tb_lfsr32 -- checks the LFSR against an independent bit-serial model, its
// hold behaviour when not stepped, and the period of a 5-bit maximal-length
// instance (x^5 + x^3 + 1, period 31).
module tb_lfsr32;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, step = 0, step5 = 0;
  logic [31:0] rnd;
  logic [4:0]  rnd5;
  int checks = 0, failures = 0;
  localparam logic [31:0] TAPS = 32'hC0000005;  // taps 32,31,3,1
  localparam logic [31:0] SEED = 32'h1234_ABCD;

  lfsr32 #(.WIDTH(32), .TAPS(TAPS), .SEED(SEED)) dut (.clk, .rst_n, .step, .rnd);
  lfsr32 #(.WIDTH(5), .TAPS(32'h0000_0014), .SEED(32'h0000_0003)) dut5 (
    .clk, .rst_n, .step(step5), .rnd(rnd5));

  always #5 clk = ~clk;

  function automatic logic [31:0] model_next(logic [31:0] s);
    int t[4] = '{32, 31, 3, 1};
    logic fb = 1'b1;
    foreach (t[k]) fb = fb ^ s[t[k]-1];   // XNOR = XOR chain started at 1
    return {s[30:0], fb};
  endfunction

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp_s;
    int period;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(rnd == SEED, "reset loads seed");
    exp_s = SEED;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      step = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (step) exp_s = model_next(exp_s);
      check(rnd == exp_s, $sformatf("step %0d: got %h exp %h", n, rnd, exp_s));
    end
    step = 0;
    // period of the 5-bit instance
    @(negedge clk); step5 = 1;
    period = 0;
    do begin
      @(posedge clk); #1; period++;
    end while (rnd5 != 5'd3 && period < 100);
    step5 = 0;
    check(period == 31, $sformatf("5-bit period %0d", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pbit -- checks the p-bit decision rule cycle by cycle against a model
// (m = signed(rnd_before) > round(-tanh(I)*2^31), input clipped to s[4][3]),
// and checks that the measured P(m=1) follows (1+tanh(I))/2 for several
// inputs, including saturated ones.
module tb_pbit;
  timeunit 1ns; timeprecision 1ps;
  localparam int W = 15;
  logic clk = 0, rst_n = 0, step = 0;
  logic signed [W-1:0] field = '0;
  logic m;
  logic [31:0] rnd;
  int checks = 0, failures = 0;

  pbit #(.W_SUM(W), .TAPS(32'hC2000100), .SEED(32'h0BAD_F00D), .BETA_MILLI(1000)) dut (
    .clk, .rst_n, .step, .field, .m, .rnd);

  always #5 clk = ~clk;

  function automatic bit model(logic [31:0] r, int f);
    real x, t;
    if (f > 127) f = 127;
    if (f < -128) f = -128;
    x = real'(f) / 8.0;
    t = -$tanh(x) * 2147483648.0;
    if (t > 2147483647.0) t = 2147483647.0;
    return real'($signed(r)) > t;
  endfunction

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int fields[7] = '{0, 4, -4, 8, -12, 400, -400};  // units of 1/8
    repeat (2) @(posedge clk); #1 rst_n = 1;
    foreach (fields[k]) begin
      int ones, mism;
      real p, pe;
      ones = 0; mism = 0;
      field = W'(fields[k]);
      for (int n = 0; n < 20000; n++) begin
        logic [31:0] r0; bit e; logic m0;
        @(negedge clk);
        r0 = rnd; m0 = m;
        step = (n % 3 != 2);
        e = step ? model(r0, fields[k]) : m0;
        @(posedge clk); #1;
        if (m !== e) mism++;
        if (step) ones += m;
        step = 0;
      end
      checks++;
      if (mism != 0) begin failures++; $display("FAIL: field %0d: %0d decision mismatches", fields[k], mism); end
      p  = real'(ones) / (20000.0 * 2.0 / 3.0);
      pe = (1.0 + $tanh(real'(fields[k] > 127 ? 127 : (fields[k] < -128 ? -128 : fields[k])) / 8.0)) / 2.0;
      checks++;
      if (p - pe > 0.02 || pe - p > 0.02) begin
        failures++; $display("FAIL: field %0d: P(1)=%f expected %f", fields[k], p, pe);
      end else $display("field %0d/8: P(1)=%f expected %f", fields[k], p, pe);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

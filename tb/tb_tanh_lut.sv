// tb_tanh_lut -- compares every table word, for beta = 1 and beta = 3, with
// -tanh(beta*I)*2^31 computed by the simulator's $tanh.
module tb_tanh_lut;
  timeunit 1ns; timeprecision 1ps;
  logic [7:0]  addr;
  logic [31:0] thr1, thr3;
  int checks = 0, failures = 0;

  tanh_lut #(.W_IN(8), .W_OUT(32), .BETA_MILLI(1000)) dut1 (.addr, .thr(thr1));
  tanh_lut #(.W_IN(8), .W_OUT(32), .BETA_MILLI(3000)) dut3 (.addr, .thr(thr3));

  function automatic real expect_thr(int a, real beta);
    real x = real'((a >= 128) ? a - 256 : a) / 8.0;
    return -$tanh(beta * x) * 2147483648.0;
  endfunction

  initial begin : watchdog
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 256; a++) begin
      real e1, e3, g1, g3;
      addr = 8'(a); #1;
      e1 = expect_thr(a, 1.0); e3 = expect_thr(a, 3.0);
      g1 = real'($signed(thr1)); g3 = real'($signed(thr3));
      checks += 2;
      if (g1 - e1 > 4.0 || e1 - g1 > 4.0) begin
        failures++; $display("FAIL: beta=1 addr %0d got %f exp %f", a, g1, e1);
      end
      if (g3 - e3 > 4.0 || e3 - g3 > 4.0) begin
        failures++; $display("FAIL: beta=3 addr %0d got %f exp %f", a, g3, e3);
      end
    end
    // anchor points
    addr = 8'd0; #1; checks++; if (thr1 != 32'd0) begin failures++; $display("FAIL: tanh(0)"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_smtj_pbit -- statistics of the behavioural sMTJ p-bit model.
//
// A device with a 1 us relaxation time (scaled down from milliseconds so
// that many thousands of switching events fit in a short run) is observed
// at several input voltages. Checked: the time-averaged output follows
// 0.5*(1 + tanh(3.43*(v - 1.55))), the geometric mean of the high and low
// mean dwell times is the relaxation time, the dwell times look exponential
// (standard deviation close to the mean), and two seeds give different
// telegraph signals.
module tb_smtj_pbit;
  timeunit 1ns; timeprecision 1ps;
  int checks = 0, failures = 0;
  int vin = 1550;
  logic out_a, out_b;

  smtj_pbit #(.TAU_NS(1000), .SEED(7))  dut   (.v_in_mv(vin), .v_out(out_a));
  smtj_pbit #(.TAU_NS(1000), .SEED(99)) other (.v_in_mv(vin), .v_out(out_b));

  initial begin : watchdog
    #100000000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real t_last;
  real sum_hi, sum_lo, sq_hi, sq_lo;
  int  n_hi, n_lo;
  bit  meas;

  always @(out_a) if (meas) begin
    real d;
    d = $realtime - t_last;
    if (out_a == 1'b0) begin sum_hi += d; sq_hi += d * d; n_hi++; end   // a high dwell just ended
    else               begin sum_lo += d; sq_lo += d * d; n_lo++; end
    t_last = $realtime;
  end

  task automatic measure(int mv);
    real p_exp, p_got, m_hi, m_lo, s_hi, gm;
    int diff;
    vin = mv;
    #20000;                         // let the new voltage act
    @(out_a);
    sum_hi = 0; sum_lo = 0; sq_hi = 0; sq_lo = 0; n_hi = 0; n_lo = 0;
    t_last = $realtime; meas = 1;
    diff = 0;
    repeat (4000000 / 50) begin #50; if (out_a != out_b) diff++; end
    meas = 0;
    p_exp = 0.5 * (1.0 + $tanh(3.43 * (real'(mv) - 1550.0) / 1000.0));
    p_got = sum_hi / (sum_hi + sum_lo);
    m_hi = sum_hi / n_hi; m_lo = sum_lo / n_lo;
    s_hi = $sqrt(sq_hi / n_hi - m_hi * m_hi);
    gm = $sqrt(m_hi * m_lo);
    $display("v=%0d mV  p=%f (exp %f)  dwell hi %f lo %f  geo-mean %f  sd/mean %f  events %0d",
             mv, p_got, p_exp, m_hi, m_lo, gm, s_hi / m_hi, n_hi + n_lo);
    checks++; if (p_got < p_exp - 0.04 || p_got > p_exp + 0.04) begin failures++; $display("FAIL: p at %0d mV", mv); end
    checks++; if (gm < 900.0 || gm > 1100.0) begin failures++; $display("FAIL: relaxation time %f", gm); end
    checks++; if (s_hi / m_hi < 0.85 || s_hi / m_hi > 1.15) begin failures++; $display("FAIL: dwell not exponential"); end
    checks++; if (diff < 4000000 / 50 / 10) begin failures++; $display("FAIL: two devices agree too often"); end
  endtask

  initial begin
    #10;
    measure(1550);
    measure(1850);
    measure(1400);
    measure(1700);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

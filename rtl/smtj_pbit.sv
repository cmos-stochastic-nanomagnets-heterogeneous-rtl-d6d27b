// smtj_pbit -- behavioural model of the analog sMTJ-based p-bit circuit.
// This is a behavioural model (not synthesizable): the real part is a
// stochastic magnetic tunnel junction in a double-branch current-mirror
// circuit whose two drain voltages (sMTJ branch and R_ave reference branch)
// are compared by an op-amp and buffered by a BJT stage to 3 V logic.
//
// The model reproduces what the digital side sees: a random telegraph signal
// on `v_out`. Dwell times in each state are exponentially distributed
// (a Poisson process, as measured). With p = 0.5*(1 + tanh(BETA_V*(v_in-V0)))
// the mean dwell times are tau_1 = TAU_NS*sqrt(p/(1-p)) in the high state and
// tau_0 = TAU_NS*sqrt((1-p)/p) in the low state, so that their geometric mean
// is TAU_NS (the "mean relaxation time" of the device) and the long-run time
// average of v_out is p, the fitted transfer curve of the circuit
// (V0 = 1.55 V, beta = 3.43 /V). The p-computer runs the circuits at the
// 50/50 point v_in = V0. The dwell split is this model's assumption.
//
// Interface: `v_in_mv` is the DC input voltage in millivolts; `v_out` is the
// logic level at the FPGA pin. Parameters are integers (ns, mV, 1/V x 1000)
// so that the model elaborates in tools without real parameters. SEED makes runs reproducible and devices distinct.
module smtj_pbit #(
  parameter int TAU_NS     = 2400000,  // mean relaxation time, ns
  parameter int V0_MV      = 1550,     // 50/50 input voltage, mV
  parameter int BETA_MILLI = 3430,     // slope of the tanh fit, 1/V x 1000
  parameter int SEED       = 1
) (
  input  int   v_in_mv,
  output logic v_out
);
  timeunit 1ns; timeprecision 1ps;

  function automatic real prob_high(int v_mv);
    real x, e;
    x = (real'(BETA_MILLI) / 1000.0) * (real'(v_mv - V0_MV) / 1000.0);
    if (x > 15.0) x = 15.0;
    if (x < -15.0) x = -15.0;
    e = $exp(2.0 * x);
    return e / (e + 1.0);      // 0.5*(1+tanh(x))
  endfunction

  int unsigned rng_state;

  // uniform on (0,1), xorshift32 so that the model has its own stream
  function automatic real uniform(ref int unsigned s);
    s ^= s << 13;
    s ^= s >> 17;
    s ^= s << 5;
    return (real'(s) + 0.5) / 4294967296.0;
  endfunction

  bit started = 1'b0;

  // one dwell per pass: draw its length, wait, flip
  always begin : telegraph
    real p, mean, dwell;
    if (!started) begin
      rng_state = 32'h2545F491 ^ (SEED * 32'h9E3779B9);
      if (rng_state == 0) rng_state = 1;
      v_out   = uniform(rng_state) < 0.5;
      started = 1'b1;
    end
    p = prob_high(v_in_mv);
    if (p < 1e-6) p = 1e-6;
    if (p > 1.0 - 1e-6) p = 1.0 - 1e-6;
    mean  = v_out ? real'(TAU_NS) * $sqrt(p / (1.0 - p))
                  : real'(TAU_NS) * $sqrt((1.0 - p) / p);
    dwell = -mean * $ln(uniform(rng_state));
    if (dwell < 0.001) dwell = 0.001;
    #(dwell);
    v_out = ~v_out;
  end
endmodule

// mtj_cell_model: behavioural model of 16 stochastic MTJs with their series
// sense resistors, for simulation only.
//
// Each cell is antiparallel (AP, bit 0) or parallel (P, bit 1). A drive code
// at or below RESET_MAX forces AP. When the drive rises above PERTURB_MIN
// from below, an AP cell switches to P with probability
// 0.5 + (code - V50[i]) / (2*SPAN), clipped to [0, 1]: a linear stand-in for
// the measured sigmoid-like curve, centred on a per-cell 50 % code
// V50[i] = V50_BASE + i*V50_STEP. While the drive is a small positive read
// bias (0 < code <= PERTURB_MIN) the output voltage code is P_LEVEL or
// AP_LEVEL plus up to NOISE counts of noise; otherwise it is 0.
module mtj_cell_model
  import mtj_trng_pkg::*;
#(
  parameter int RESET_MAX   = -8000,
  parameter int PERTURB_MIN = 4000,
  parameter int V50_BASE    = 10000,
  parameter int V50_STEP    = 500,
  parameter int SPAN        = 2000,
  parameter int P_LEVEL     = 3000,
  parameter int AP_LEVEL    = 1000,
  parameter int NOISE       = 64
) (
  input  dac_code_t [N_MTJ-1:0] vdd,
  output adc_code_t [N_MTJ-1:0] vout,
  output logic      [N_MTJ-1:0] state,
  output int                    n_resets,
  output int                    n_perturbs
);
  dac_code_t [N_MTJ-1:0] prev;

  initial begin
    state = '0; prev = '0; vout = '0; n_resets = 0; n_perturbs = 0;
  end

  function automatic int prob_x10000(int code, int i);
    int p;
    p = 5000 + ((code - (V50_BASE + i*V50_STEP)) * 10000) / (2*SPAN);
    if (p < 0) p = 0;
    if (p > 10000) p = 10000;
    return p;
  endfunction

  always @(vdd) begin
    for (int i = 0; i < N_MTJ; i++) begin
      if (vdd[i] != prev[i]) begin
        if (int'(vdd[i]) <= RESET_MAX) begin
          state[i] = 1'b0;
          if (i == 0) n_resets++;
        end else if (int'(vdd[i]) > PERTURB_MIN && int'(prev[i]) <= PERTURB_MIN) begin
          if (i == 0) n_perturbs++;
          if (!state[i] && ($urandom % 10000) < prob_x10000(int'(vdd[i]), i)) state[i] = 1'b1;
        end
        prev[i] = vdd[i];
      end
      if (int'(vdd[i]) > 0 && int'(vdd[i]) <= PERTURB_MIN)
        vout[i] = ADC_BITS'((state[i] ? P_LEVEL : AP_LEVEL) + ($urandom % NOISE));
      else
        vout[i] = '0;
    end
  end
endmodule

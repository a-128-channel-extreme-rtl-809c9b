// Behavioural model (not synthesizable logic): the MLCP current mirror array,
// i.e. the random input-weight layer of the extreme learning machine.
//
// Every row current I_DAC,j drives the gate of a diode-connected input
// transistor; one mirror transistor per hidden node copies it into that
// node's column, and each column sums its D copies into I_in,i. All mirrors
// are drawn identical, so the gain of each is set by the random threshold
// mismatch between the two transistors, in sub-threshold
//     w_ij = exp(dVt_ij / U_T),   dVt_ij ~ N(MU_VT, SIGMA_VT),
// a log-normal random weight. The model draws the dVt_ij once at time zero
// (Box-Muller on a seeded generator, so a chip instance is reproducible
// through SEED) and then computes I_in,i = sum_j w_ij * I_DAC,j whenever a row
// current changes. SIGMA_VT = 16.5 mV and MU_VT = 0 follow the published
// measurement; U_T = 25.85 mV (300 K) is this model's choice. Mirror noise and
// output-conductance errors are not modelled.
//
// Interface: i_dac[j] row currents and i_in[i] column currents, in amperes.
// The drawn weights are in w[i][j], where a testbench can read them, as the
// published weights were measured, to predict the hidden-layer outputs.
module mirror_array_model #(
  parameter int unsigned D        = elm_pkg::N_ROWS,
  parameter int unsigned L        = elm_pkg::N_HIDDEN,
  parameter real         SIGMA_VT = 16.5e-3,
  parameter real         MU_VT    = 0.0,
  parameter real         U_T      = 25.85e-3,
  parameter int unsigned SEED     = 1
) (
  input  real i_dac [D],
  output real i_in  [L]
);
  real w [L][D];
  bit  w_ready = 1'b0;

  // 32-bit xorshift generator so the weights depend on SEED only
  function automatic int unsigned xorshift(input int unsigned x);
    x ^= x << 13;
    x ^= x >> 17;
    x ^= x << 5;
    return x;
  endfunction

  initial begin
    int unsigned st;
    real u1, u2, z;
    st = SEED * 32'h9E3779B9 + 32'h1234567;
    if (st == 0) st = 1;
    for (int unsigned i = 0; i < L; i++)
      for (int unsigned j = 0; j < D; j++) begin
        st = xorshift(st);
        u1 = (real'(st) + 1.0) / 4294967297.0;
        st = xorshift(st);
        u2 = real'(st) / 4294967296.0;
        z  = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
        w[i][j] = $exp((MU_VT + SIGMA_VT * z) / U_T);
      end
    w_ready = 1'b1;
  end

  always_comb begin
    for (int unsigned i = 0; i < L; i++) begin
      i_in[i] = 0.0;
      if (w_ready)
        for (int unsigned j = 0; j < D; j++) i_in[i] += w[i][j] * i_dac[j];
    end
  end
endmodule

// Behavioural model (not synthesizable logic): 6-bit current-mode DAC of one
// MLCP input row.
//
// On the chip a MOS ladder splits the reference current I_ref into binary
// weighted branches; the bits D5..D0 of the window count steer each branch
// either to the output I_DAC or away from it, so I_DAC = I_ref * D / 64. The
// model computes exactly that on real-valued currents (amperes). The measured
// DNL of the real ladder (about +-3 LSB) is not modelled. The output follows
// the inputs at once.
module dac_model #(
  parameter int unsigned NBIT = elm_pkg::WIN_W
) (
  input  logic [NBIT-1:0] d,
  input  real             i_ref,
  output real             i_dac
);
  always_comb i_dac = i_ref * real'(d) / real'(2.0 ** NBIT);
endmodule

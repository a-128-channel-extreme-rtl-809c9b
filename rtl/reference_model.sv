// Behavioural model (not synthesizable logic): MLCP reference current source.
//
// The chip's bias block supplies the input DACs with a reference current
// I_ref that is programmable with a 6-bit code over 1 nA to 63 nA. The model
// gives I_ref = code * I_LSB with I_LSB = 1 nA, in amperes on a real-valued
// output. The circuit itself is not modelled; the linear code mapping is this
// model's choice. The output follows the code at once.
module reference_model #(
  parameter real I_LSB = 1.0e-9
) (
  input  logic [elm_pkg::IREF_W-1:0] iref_code,
  output real                        i_ref
);
  always_comb i_ref = I_LSB * real'(iref_code);
endmodule

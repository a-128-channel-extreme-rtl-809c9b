// 1-to-D spike demultiplexer of the MLCP.
//
// The DSP announces each detected spike with a one-cycle strobe on spk and
// the 7-bit channel address A<6:0> on addr. This block decodes the address
// into a one-hot strobe for the addressed input-processing row. It is purely
// combinational; the address is only looked at while spk is high, and an
// address at or above D reaches no row (the published chip has exactly 128
// rows, so every address is valid there).
module spk_demux #(
  parameter int unsigned D      = elm_pkg::N_ROWS,
  parameter int unsigned ADDR_W = elm_pkg::ADDR_W
) (
  input  logic              spk,
  input  logic [ADDR_W-1:0] addr,
  output logic [D-1:0]      row_spk
);
  always_comb begin
    row_spk = '0;
    for (int unsigned j = 0; j < D; j++)
      row_spk[j] = spk && (32'(addr) == j);
  end
endmodule

// Column scanner: serial read-out of the L hidden-node counters on C<13:0>.
//
// When NEU falls (end of the counting phase) the scanner copies all L counter
// values into its own latches and points at column 1, so C shows h_1. Each
// rising edge of CLK_out then moves the pointer to the next column; after the
// last column the pointer stays there. The DSP therefore reads h_1 .. h_L as
// L words, sampling C before each CLK_out rising edge. The latches keep the
// values while the counters are cleared and the next phase counts.
//
// Latching on NEU low and reading with CLK_out follow the published chip;
// the exact edge relation (latch on the NEU falling edge, advance on the
// CLK_out rising edge) is this design's choice. NEU and CLK_out are sampled
// on the system clock; C changes one cycle after the sampled edge.
module column_scanner
  import elm_pkg::*;
#(
  parameter int unsigned L = N_HIDDEN
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              neu,
  input  logic              clk_out,
  input  logic [HCNT_W-1:0] h [L],
  output logic [HCNT_W-1:0] c
);
  localparam int unsigned PW = (L > 1) ? $clog2(L) : 1;

  logic [HCNT_W-1:0] latch [L];
  logic [PW-1:0]     ptr;
  logic              neu_q, clk_out_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      neu_q     <= 1'b0;
      clk_out_q <= 1'b0;
      ptr       <= '0;
      for (int unsigned i = 0; i < L; i++) latch[i] <= '0;
    end else begin
      neu_q     <= neu;
      clk_out_q <= clk_out;
      if (neu_q && !neu) begin
        for (int unsigned i = 0; i < L; i++) latch[i] <= h[i];
        ptr <= '0;
      end else if (!neu && clk_out && !clk_out_q && 32'(ptr) < L - 1) begin
        ptr <= ptr + 1'b1;
      end
    end
  end

  assign c = latch[ptr];
endmodule

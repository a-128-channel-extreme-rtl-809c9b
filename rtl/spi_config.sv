// SPI configuration port of the MLCP.
//
// The chip stores a few programmable settings: one S_ext bit per input row
// (row input from its own spikes or, for TDBDI, from the delayed count of the
// row before it), one 3-bit f_max stop code per hidden node and the 6-bit
// code of the DAC reference current I_ref. This block loads them over a
// plain SPI port (mode 0: data sampled on the rising edge of sclk, MSB
// first). While cs_n is low every sclk rising edge shifts mosi into a chain of
// D + 3L + 6 bits; on the rising edge of cs_n the chain is copied into the
// configuration registers. A frame is, in the order sent: iref_code (6 bits),
// fmax[L-1] .. fmax[0] (3 bits each), s_ext[D-1] .. s_ext[0]. miso carries the
// oldest bit of the chain, so the previous frame comes back while a new one
// is sent.
//
// The published chip only shows an SPI block; what it holds is inferred from
// the programmable settings the chip has, and the frame format, reset values
// (S_ext = 0, f_max = 7, I_ref code = 32) and synchronous sampling of
// sclk/cs_n on the system clock are this design's choices. sclk must be
// slower than a quarter of the system clock.
module spi_config
  import elm_pkg::*;
#(
  parameter int unsigned D = N_ROWS,
  parameter int unsigned L = N_HIDDEN
) (
  input  logic              clk,
  input  logic              por_n,
  input  logic              sclk,
  input  logic              mosi,
  input  logic              cs_n,
  output logic              miso,
  output logic [D-1:0]      s_ext,
  output logic [FMAX_W-1:0] fmax [L],
  output logic [IREF_W-1:0] iref_code
);
  localparam int unsigned NBITS = D + FMAX_W * L + IREF_W;

  logic [NBITS-1:0] chain;
  logic [2:0]       sclk_s, cs_s;
  logic [1:0]       mosi_s;

  always_ff @(posedge clk) begin
    if (!por_n) begin
      sclk_s    <= '0;
      cs_s      <= '1;
      mosi_s    <= '0;
      chain     <= '0;
      s_ext     <= '0;
      iref_code <= IREF_W'(32);
      for (int unsigned i = 0; i < L; i++) fmax[i] <= '1;
    end else begin
      sclk_s <= {sclk_s[1:0], sclk};
      cs_s   <= {cs_s[1:0], cs_n};
      mosi_s <= {mosi_s[0], mosi};
      if (!cs_s[1] && sclk_s[1] && !sclk_s[2])
        chain <= {chain[NBITS-2:0], mosi_s[1]};
      if (cs_s[1] && !cs_s[2]) begin
        s_ext     <= chain[D-1:0];
        for (int unsigned i = 0; i < L; i++)
          fmax[i] <= chain[D + FMAX_W*i +: FMAX_W];
        iref_code <= chain[NBITS-1 -: IREF_W];
      end
    end
  end

  assign miso = chain[NBITS-1];
endmodule

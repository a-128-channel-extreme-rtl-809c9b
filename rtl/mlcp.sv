// MLCP: the machine-learning co-processor chip, the first (random) layer and
// the hidden layer of an extreme learning machine for neural decoding.
//
// Spikes arrive as SPK pulses with a 7-bit channel address and are steered
// by the demultiplexer to one of D input rows. Each row's WinCNT counts the
// spikes of the last five CLK_in periods (a 100 ms moving window at
// t_s = 20 ms); a row whose S_ext bit is set instead takes the delayed
// sub-window counts of the row above it (delay chosen by SDL<2:0>), which adds
// time-delayed copies of a channel as extra input dimensions. A 6-bit DAC per
// row turns the window count into a current, the mirror array copies each row
// current into all L hidden nodes with a random log-normal gain, and each
// hidden node's CCO converts its summed current into a pulse rate. While NEU
// is high each node's counter counts those pulses up to its f_max stop value;
// when NEU falls the column scanner latches the L counts and shifts them out
// one word per CLK_out pulse on C<13:0>. RN_in clears the input rows and
// RN_cnt the hidden counters. S_ext, f_max and the I_ref code come from the
// SPI configuration port.
//
// The block structure and pin names follow the published chip. The DAC,
// reference, mirror array and CCOs are behavioural models of analog
// circuits (real-valued currents), so this module as a whole is a
// simulation model; every other block is synthesizable. The system clock clk
// and the power-on reset por_n are additions of this design: the chip's
// digital inputs SPK, CLK_in, NEU and CLK_out are sampled on clk and their
// rising edges detected, so they must stay high or low for at least two clk
// cycles, and A<6:0> must be stable while SPK is high.
//
// Timing: a WinCNT update happens two clk cycles after the CLK_in rising
// edge at the pin, a spike is counted two cycles after its SPK rising edge.
module mlcp
  import elm_pkg::*;
#(
  parameter int unsigned D    = N_ROWS,
  parameter int unsigned L    = N_HIDDEN,
  parameter int unsigned SEED = 1
) (
  input  logic              clk,
  input  logic              por_n,
  // spike input from the DSP
  input  logic              spk,
  input  logic [ADDR_W-1:0] addr,
  // input processing control
  input  logic [SDL_W-1:0]  sdl,
  input  logic              rn_in,
  input  logic              clk_in,
  // hidden layer control and read-out
  input  logic              neu,
  input  logic              rn_cnt,
  input  logic              clk_out,
  output logic [HCNT_W-1:0] c,
  // configuration
  input  logic              sclk,
  input  logic              mosi,
  input  logic              cs_n,
  output logic              miso
);
  logic                spk_q, clk_in_q;
  logic                spk_rise, tick;
  logic [D-1:0]        row_spk;
  logic [D-1:0]        s_ext;
  logic [FMAX_W-1:0]   fmax [L];
  logic [IREF_W-1:0]   iref_code;
  logic [SUBCNT_W-1:0] d_chain [D+1];
  logic [WIN_W-1:0]    q [D];
  logic [HCNT_W-1:0]   h [L];
  logic [L-1:0]        v_o;
  real                 i_ref;
  real                 i_dac [D];
  real                 i_in [L];

  always_ff @(posedge clk) begin
    if (!por_n) begin
      spk_q    <= 1'b0;
      clk_in_q <= 1'b0;
    end else begin
      spk_q    <= spk;
      clk_in_q <= clk_in;
    end
  end
  assign spk_rise = spk && !spk_q;
  assign tick     = clk_in && !clk_in_q;

  spi_config #(.D(D), .L(L)) u_spi (
    .clk, .por_n, .sclk, .mosi, .cs_n, .miso, .s_ext, .fmax, .iref_code
  );

  spk_demux #(.D(D)) u_demux (.spk(spk_rise), .addr, .row_spk);

  reference_model u_ref (.iref_code, .i_ref);

  assign d_chain[0] = '0;   // the first row has no row above it

  for (genvar j = 0; j < D; j++) begin : g_row
    wincnt u_wincnt (
      .clk, .rn_in, .tick, .spk(row_spk[j]), .s_ext(s_ext[j]), .sdl,
      .d_i(d_chain[j]), .d_o(d_chain[j+1]), .q(q[j])
    );
    dac_model u_dac (.d(q[j]), .i_ref, .i_dac(i_dac[j]));
  end

  mirror_array_model #(.D(D), .L(L), .SEED(SEED)) u_mirror (.i_dac, .i_in);

  for (genvar i = 0; i < L; i++) begin : g_node
    cco_model u_cco (.neu, .i_in(i_in[i]), .v_o(v_o[i]));
    hidden_counter u_cnt (
      .clk, .rn_cnt, .neu, .v_o(v_o[i]), .fmax(fmax[i]), .count(h[i])
    );
  end

  column_scanner #(.L(L)) u_scan (.clk, .rst_n(por_n), .neu, .clk_out, .h, .c);
endmodule

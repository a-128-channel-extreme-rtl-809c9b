// ELM neural decoder: the MLCP co-processor with its DSP-side control,
// trained output layer and onset post-processing.
//
// Spike events (SPK pulse plus 7-bit channel address) enter the MLCP, which
// forms 100 ms moving-window spike counts per channel and computes the
// random-projection hidden layer h_1 .. h_L in mixed-signal form. The timing
// controller runs the fixed classification period: a CLK_in edge, a NEU
// counting phase, the read-out of the L counts over C<13:0> with CLK_out and
// the RN_cnt clear. The output stage multiplies the read-out words with the
// trained weights beta into C = M + 1 outputs, picks the movement class s as
// the largest of the first M and compares the last output with theta to get
// the onset decision G. The onset post-processing turns G into G_track and
// F = G_track * s, the decoded output: the class of a movement at its onset,
// otherwise 0. out_valid pulses once per classification period.
//
// The partition (analog first layer and hidden layer on the chip, digital
// second layer and post-processing outside) follows the published system;
// here the outside part, which the published board runs on an MCU, is RTL
// too. Configuration: S_ext, f_max and the I_ref code over SPI, beta over a
// write port, theta and SDL<2:0> as input pins. The defaults give a 20 ms
// period at a 10 MHz clk.
module elm_decoder
  import elm_pkg::*;
#(
  parameter int unsigned D           = N_ROWS,
  parameter int unsigned L           = N_HIDDEN,
  parameter int unsigned SEED        = 1,
  parameter int unsigned TS_CYC      = 200_000,
  parameter int unsigned NEU_CYC     = 100_000,
  parameter int unsigned CLKOUT_HALF = 4,
  parameter int unsigned LAMBDA      = 6,
  parameter int unsigned TAU         = 6,
  parameter int unsigned TR          = 7
) (
  input  logic                     clk,
  input  logic                     por_n,
  input  logic                     run,
  // spike events
  input  logic                     spk,
  input  logic [ADDR_W-1:0]        addr,
  input  logic [SDL_W-1:0]         sdl,
  // MLCP configuration port
  input  logic                     sclk,
  input  logic                     mosi,
  input  logic                     cs_n,
  output logic                     miso,
  // output weights and onset threshold
  input  logic                     beta_we,
  input  logic [ADDR_W-1:0]        beta_addr_i,
  input  logic [3:0]               beta_addr_k,
  input  logic signed [BETA_W-1:0] beta_wdata,
  input  logic signed [ACC_W-1:0]  theta,
  // decoded outputs
  output logic signed [ACC_W-1:0]  o [N_OUT],
  output logic [CLASS_W-1:0]       s,
  output logic                     g,
  output logic                     g_track,
  output logic                     refractory,
  output logic [CLASS_W-1:0]       f,
  output logic                     out_valid,
  // MLCP pins, for observation
  output logic                     clk_in,
  output logic                     neu,
  output logic [HCNT_W-1:0]        c
);
  logic              rn_in, clk_out, rn_cnt;
  logic              h_valid, frame_done;
  logic [ADDR_W-1:0] h_idx;

  timing_control #(.L(L), .TS_CYC(TS_CYC), .NEU_CYC(NEU_CYC), .CLKOUT_HALF(CLKOUT_HALF)) u_tc (
    .clk, .rst_n(por_n), .run, .clk_in, .rn_in, .neu, .clk_out, .rn_cnt,
    .h_valid, .h_idx, .frame_done
  );

  mlcp #(.D(D), .L(L), .SEED(SEED)) u_mlcp (
    .clk, .por_n, .spk, .addr, .sdl, .rn_in, .clk_in, .neu, .rn_cnt, .clk_out, .c,
    .sclk, .mosi, .cs_n, .miso
  );

  elm_output_stage #(.L(L)) u_out (
    .clk, .rst_n(por_n), .beta_we, .beta_addr_i, .beta_addr_k, .beta_wdata, .theta,
    .h_valid, .h_idx, .h(c), .frame_done, .o, .s, .g, .out_valid
  );

  onset_fsm #(.LAMBDA(LAMBDA), .TAU(TAU), .TR(TR)) u_onset (
    .clk, .rst_n(por_n), .valid(out_valid), .g, .s, .g_track, .f, .refractory
  );
endmodule

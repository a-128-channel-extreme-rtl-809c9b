// End-to-end testbench of elm_decoder with every parameter at its default:
// 128 input rows, 128 hidden nodes, a 20 ms classification period at a
// 10 MHz clock with a 10 ms NEU phase. One short trial: one quiet period,
// fourteen movement periods, three quiet periods. The stimulus and checks are in
// elm_decoder_tb_body.svh; the sizes below only describe the defaults to the
// bench.
module tb_elm_decoder_full;
  timeunit 1ns; timeprecision 1ps;
  import tb_ref_pkg::*;
  localparam int unsigned D = 128, L = 128, TS = 200_000, NEU_CYC = 100_000, CH = 4;
  localparam int IREF = 1, N_TRIALS = 1, FMAX0 = 3;
  localparam int N_WARM = 1, N_ACT = 14, N_QUIET = 3;
`include "elm_decoder_tb_body.svh"
  elm_decoder u_dut (
    .clk, .por_n, .run, .spk, .addr, .sdl, .sclk, .mosi, .cs_n, .miso,
    .beta_we, .beta_addr_i, .beta_addr_k, .beta_wdata, .theta,
    .o, .s, .g, .g_track, .refractory, .f, .out_valid, .clk_in, .neu, .c);
endmodule
